// shift_add: shift-and-add accumulator behind one ADC.
//
// Each conversion of ADC g belongs to one slot b of the M_BITS cells that
// encode a J element. The code is shifted left by the slot's binary weight
// (zero for thermometer coding) and added to, or for a negative-weight slot
// subtracted from, the partial sum; clear zeroes the sum. After all slots
// have been accumulated the partial sum equals sum_r x_r * J[r][g] (times
// y), i.e. element g of the product. The paper names the shift-and-add units
// and draws an adder with feedback into a partial-sum register; the slot
// weighting follows the encoding chosen in ising_pkg.
// Timing: en, slot and code are sampled on the clock edge, psum is the
// registered sum.
module shift_add
  import ising_pkg::*;
#(
  parameter int unsigned BITS   = 6,
  parameter int unsigned ACC_W = 16,
  parameter jenc_e       ENC    = ENC_THERMO
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          en,
  input  logic [$clog2(M_BITS)-1:0]   slot,
  input  logic [BITS-1:0]               code,
  output logic signed [ACC_W-1:0]      psum
);

  logic signed [ACC_W-1:0] term;

  always_comb begin
    term = ACC_W'(code) <<< slot_shift(int'(slot), ENC);
    if (slot_neg(int'(slot), ENC))
      term = -term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      psum <= '0;
    else if (clear)
      psum <= '0;
    else if (en)
      psum <= psum + term;
  end

endmodule
