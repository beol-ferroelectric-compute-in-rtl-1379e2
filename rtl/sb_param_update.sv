// sb_param_update: the "Para. Update" step of simulated bifurcation.
//
// Holds the annealing-like parameter p in fixed point (FRAC fractional
// bits). clear sets p = 0; each step pulse raises it by P_STEP, saturating
// at DELTA, so p goes from 0 to Delta over the run as the paper describes.
// A linear ramp of DELTA/ITERS per iteration is this design's choice.
// Registered output.
module sb_param_update
  import ising_pkg::*;
#(
  parameter int unsigned DELTA  = 256,
  parameter int unsigned P_STEP = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        step,
  output logic [15:0] p
);

  logic [16:0] p_next;
  assign p_next = 17'(p) + 17'(P_STEP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      p <= '0;
    else if (clear)
      p <= '0;
    else if (step)
      p <= (p_next > 17'(DELTA)) ? 16'(DELTA) : p_next[15:0];
  end

endmodule
