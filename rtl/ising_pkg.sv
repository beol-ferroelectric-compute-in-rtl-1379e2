// ising_pkg: types, sizes and encoding helpers shared by the FeFET
// compute-in-memory (CiM) Ising machine.
//
// The crossbar holds an N x N coupling matrix J with every element spread
// over M_BITS adjacent columns, one FeFET cell (one bit) per column, so the
// array is N rows by N*M_BITS columns (32 x 256 here, as fabricated).
// The demonstration problem uses thermometer coding; the split used here is
// this design's own choice: slots 0..M/2-1 hold a thermometer code of max(J,0)
// and slots M/2..M-1 a thermometer code of max(-J,0), so an 8-bit element
// covers the integer weights -4..+4. Plain two's-complement binary coding is
// offered as the alternative m-bit encoding (slot b has weight 2^b, the top
// slot is negative).
//
// Ternary values {-1,0,+1} (light simulated bifurcation) are held as
// 2-bit signed numbers. Fixed-point SB constants use FRAC fractional bits.
// Every module imports the whole package, so a lint run on a single small
// module reports the widths it does not need as unused; that is expected.
package ising_pkg;

  localparam int unsigned N_SPINS  = 32;             // spins = array rows
  localparam int unsigned M_BITS   = 8;              // cells per J element
  localparam int unsigned I_W      = 16;             // column current, nA
  localparam int unsigned ADC_BITS = 6;              // counts 0..32 cells
  localparam int unsigned PSUM_W   = 16;             // partial sum width
  localparam int unsigned JVAL_W   = 8;              // signed J element
  localparam int unsigned S_W      = 24;             // VMV result width
  localparam int unsigned FRAC     = 8;              // SB fixed point
  localparam int          ONE      = 1 << FRAC;

  // Word-line (gate) drive levels: off, read bias, +4 V / -4 V program pulse.
  typedef enum logic [1:0] {WL_OFF, WL_READ, WL_PROG_P, WL_PROG_N} wl_drive_e;
  // Bit-line (drain) drive levels: off, read bias, selected for programming.
  typedef enum logic [1:0] {BL_OFF, BL_READ, BL_PROG} bl_drive_e;
  // Driver modes.
  typedef enum logic [1:0] {DRV_IDLE, DRV_READ, DRV_PROG} drv_mode_e;
  // CiM operations: vector-matrix-vector (scalar E) or vector-matrix (vector E).
  typedef enum logic {OP_VMV, OP_VMM} cim_op_e;
  // m-bit encodings of a J element across its columns.
  typedef enum logic {ENC_THERMO, ENC_BINARY} jenc_e;

  typedef logic signed [1:0] trit_t;
  localparam trit_t T_POS  = 2'sd1;
  localparam trit_t T_ZERO = 2'sd0;
  localparam trit_t T_NEG  = -2'sd1;

  // Cell bits of one J element, slot b goes to column (element*M_BITS + b).
  function automatic logic [M_BITS-1:0] encode_j(input logic signed [JVAL_W-1:0] v,
                                                 input jenc_e enc);
    logic [M_BITS-1:0] bits;
    bits = '0;
    if (enc == ENC_BINARY) begin
      bits = M_BITS'(v);
    end else begin
      for (int b = 0; b < M_BITS / 2; b++) begin
        bits[b]              = (int'(v) > b);       // positive thermometer
        bits[b + M_BITS / 2] = (-int'(v) > b);      // negative thermometer
      end
    end
    return bits;
  endfunction

  // Left shift applied to the ADC code of slot b.
  function automatic int unsigned slot_shift(input int unsigned b, input jenc_e enc);
    return (enc == ENC_BINARY) ? b : 0;
  endfunction

  // True when slot b carries negative weight.
  function automatic logic slot_neg(input int unsigned b, input jenc_e enc);
    return (enc == ENC_BINARY) ? (b == M_BITS - 1) : (b >= M_BITS / 2);
  endfunction

  // Ternary quantisation of a fixed-point value (interval 1): values at or
  // above +0.5 map to +1, at or below -0.5 to -1, the rest to 0.
  function automatic trit_t quant_trit(input logic signed [31:0] v);
    if (v >= (ONE / 2))       return T_POS;
    else if (v <= -(ONE / 2)) return T_NEG;
    else                      return T_ZERO;
  endfunction

endpackage
