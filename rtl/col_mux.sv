// col_mux: column multiplexers between the crossbar and the ADCs.
//
// The columns are split into GROUPS groups of WAYS adjacent columns; group g
// holds the M_BITS cells of the J elements of spin g, and its multiplexer
// routes column g*WAYS + sel to ADC g. Stepping sel through 0..WAYS-1 lets
// GROUPS ADCs read all GROUPS*WAYS columns in WAYS conversions. The paper
// shows one MUX per ADC; the group size of one J element (8 columns) is this
// design's choice. Combinational (in silicon an analog switch).
module col_mux
  import ising_pkg::*;
#(
  parameter int unsigned GROUPS = 32,
  parameter int unsigned WAYS   = 8
) (
  input  logic [$clog2(WAYS)-1:0] sel,
  input  logic [I_W-1:0]          i_col [GROUPS*WAYS],
  output logic [I_W-1:0]          i_mux [GROUPS]
);

  always_comb begin
    for (int g = 0; g < GROUPS; g++)
      i_mux[g] = i_col[g * WAYS + int'(sel)];
  end

endmodule
