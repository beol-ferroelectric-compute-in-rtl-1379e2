// output_stage: the "Output E" stage after the partial sums.
//
// hold_pos stores the partial sums of the first (positive-input) VMM phase.
// latch_out, at the end of an operation, registers the result: for a VMM
// e_vec[g] = stored positive-phase sum minus the current (negative-phase)
// sum, which is element g of J X for ternary X; for a VMV e_scalar = the
// sum of all partial sums, i.e. X^T J Y. Both outputs hold until the next
// latch_out. Subtracting the two phases follows the paper; the registers
// and the adder tree are this design's.
module output_stage
  import ising_pkg::*;
#(
  parameter int unsigned N      = N_SPINS,
  parameter int unsigned IN_W = 16,
  parameter int unsigned SUM_W  = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cim_op_e                   op,
  input  logic signed [IN_W-1:0]  psum [N],
  input  logic                      hold_pos,
  input  logic                      latch_out,
  output logic signed [IN_W-1:0]  e_vec [N],
  output logic signed [SUM_W-1:0]   e_scalar
);

  logic signed [IN_W-1:0] pos_sum [N];
  logic signed [SUM_W-1:0]  total;

  always_comb begin
    total = '0;
    for (int g = 0; g < N; g++)
      total += SUM_W'(psum[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N; g++) begin
        pos_sum[g] <= '0;
        e_vec[g]   <= '0;
      end
      e_scalar <= '0;
    end else begin
      if (hold_pos)
        for (int g = 0; g < N; g++) pos_sum[g] <= psum[g];
      if (latch_out) begin
        if (op == OP_VMM)
          for (int g = 0; g < N; g++) e_vec[g] <= pos_sum[g] - psum[g];
        else
          e_scalar <= total;
      end
    end
  end

endmodule
