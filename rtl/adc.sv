// adc: behavioural model of one column-current ADC.
//
// This is a behavioural model of an analog converter (on the demonstration
// board the currents are read by board-level ADCs), not synthesizable logic
// for a standard-cell flow. When conv is high at a clock edge the input
// current is sampled and converted to the nearest whole number of LSB_NA
// steps, saturating at 2^BITS-1; code and valid appear one cycle after conv.
// With LSB_NA equal to the cell current the code is the number of
// conducting cells in the column. Resolution and step are assumed values;
// the paper gives neither.
module adc
  import ising_pkg::*;
#(
  parameter int unsigned BITS   = 6,
  parameter int unsigned LSB_NA = 130
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            conv,
  input  logic [I_W-1:0]  i_in,
  output logic [BITS-1:0] code,
  output logic            valid
);

  localparam int unsigned MAXC = (1 << BITS) - 1;

  logic [I_W:0] steps;
  assign steps = ((I_W + 1)'(i_in) + (I_W + 1)'(LSB_NA / 2)) / (I_W + 1)'(LSB_NA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= conv;
      if (conv)
        code <= (steps > (I_W + 1)'(MAXC)) ? BITS'(MAXC) : BITS'(steps);
    end
  end

endmodule
