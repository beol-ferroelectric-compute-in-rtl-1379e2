// light_sb: light simulated bifurcation (SB) engine.
//
// Each spin i has a position X_i and a momentum Y_i, both ternary
// {-1, 0, +1}, and there is no cubic term. One iteration:
//   1. ask the CiM core for JX (a two-phase ternary VMM, done pulses when
//      e_vec holds the result),
//   2. Y_i <- T( Y_i - (DELTA - p) X_i + ZETA (JX)_i )
//      X_i <- T( X_i + DELTA Y_i )           (with the new Y_i)
//      where T() is ternary quantisation (interval 1: >= +0.5 -> +1,
//      <= -0.5 -> -1, else 0), which also bounds X and Y to [-1, 1],
//   3. raise p by one step (sb_param_update).
// These are the paper's update equations with its two simplifications
// (ternary X, Y and no K X^3 term). The start state X = sigma_init (+/-1),
// Y = 0, the rounding rule and the constants DELTA = 1.0 and ZETA = 0.1
// (Q8: 256 and 26) are this design's choices; the paper only says its
// constants follow the original SB work. After ITERS iterations (20, the
// paper's demonstration) done pulses and sigma_i = sign(X_i), holding the
// previous value of sigma_i where X_i = 0.
// Handshake: start while idle; core_req is a one-cycle request with xt
// valid from then until core_done.
module light_sb
  import ising_pkg::*;
#(
  parameter int unsigned N      = N_SPINS,
  parameter int unsigned ITERS  = 20,
  parameter int unsigned DELTA  = 256,
  parameter int unsigned ZETA   = 26,
  parameter int unsigned P_STEP = DELTA / ITERS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [N-1:0]              sigma_init,
  output logic                      busy,
  output logic                      done,
  output logic                      core_req,
  output trit_t                     xt [N],
  input  logic                      core_done,
  input  logic signed [PSUM_W-1:0]  e_vec [N],
  output logic [N-1:0]              sigma,
  output logic [7:0]                iter
);

  typedef enum logic [2:0] {B_IDLE, B_REQ, B_WAIT, B_UPDATE, B_DONE} bstate_e;
  bstate_e state;

  trit_t       y [N];
  logic [15:0] p;
  logic        p_clear, p_step;
  trit_t       y_new [N];
  trit_t       x_new [N];

  localparam logic signed [31:0] DELTA_S = 32'(DELTA);
  localparam logic signed [31:0] ZETA_S  = 32'(ZETA);
  localparam logic signed [31:0] ONE_S   = 32'(ONE);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [31:0] ynum, xnum;
      ynum = 32'(y[i]) * ONE_S - (DELTA_S - 32'(signed'({16'd0, p}))) * 32'(xt[i])
             + ZETA_S * 32'(e_vec[i]);
      y_new[i] = quant_trit(ynum);
      xnum = 32'(xt[i]) * ONE_S + DELTA_S * 32'(y_new[i]);
      x_new[i] = quant_trit(xnum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      iter  <= '0;
      sigma <= '0;
      for (int i = 0; i < N; i++) begin
        xt[i] <= T_ZERO;
        y[i]  <= T_ZERO;
      end
    end else begin
      unique case (state)
        B_IDLE: if (start) begin
          iter  <= '0;
          sigma <= sigma_init;
          for (int i = 0; i < N; i++) begin
            xt[i] <= sigma_init[i] ? T_POS : T_NEG;
            y[i]  <= T_ZERO;
          end
          state <= B_REQ;
        end
        B_REQ:  state <= B_WAIT;
        B_WAIT: if (core_done) state <= B_UPDATE;
        B_UPDATE: begin
          for (int i = 0; i < N; i++) begin
            y[i]  <= y_new[i];
            xt[i] <= x_new[i];
            if (x_new[i] == T_POS)      sigma[i] <= 1'b1;
            else if (x_new[i] == T_NEG) sigma[i] <= 1'b0;
          end
          iter  <= iter + 1'b1;
          state <= (32'(iter) + 1 == 32'(ITERS)) ? B_DONE : B_REQ;
        end
        B_DONE:  state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  assign p_clear  = (state == B_IDLE) && start;
  assign p_step   = (state == B_UPDATE);
  assign core_req = (state == B_REQ);
  assign busy     = (state != B_IDLE);
  assign done     = (state == B_DONE);

  sb_param_update #(.DELTA(DELTA), .P_STEP(P_STEP)) u_param (
    .clk(clk), .rst_n(rst_n), .clear(p_clear), .step(p_step), .p(p)
  );

endmodule
