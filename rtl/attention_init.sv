// attention_init: attention-inspired initialization controller.
//
// For every spin i it asks the CiM core for one vector-matrix-vector product
// S_i = Q_i^T K V_i (qkv_gen supplies Q_i and V_i for the index on idx),
// stores the scores and their running sum, and then sets every initial spin
// at once: sigma_i = +1 (bit 1) where S_i >= Mean(S), else -1 (bit 0). The
// comparison is made without division as N*S_i >= sum(S), which is exact.
// The paper's equation writes the low state as 0 while its figure and the
// spin convention use -1; here bit 0 stands for spin -1.
// Handshake: start (while idle) begins; for each spin core_req is raised
// for one cycle and the result is taken when core_done pulses (e_scalar
// valid). done pulses one cycle when sigma is valid; sigma holds afterwards.
module attention_init
  import ising_pkg::*;
#(
  parameter int unsigned N = N_SPINS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [$clog2(N)-1:0]   idx,
  output logic                   core_req,
  input  logic                   core_done,
  input  logic signed [S_W-1:0]  e_scalar,
  output logic [N-1:0]           sigma
);

  localparam int unsigned SUM_W = S_W + $clog2(N) + 1;
  localparam logic signed [SUM_W-1:0] N_S = SUM_W'(N);

  typedef enum logic [2:0] {A_IDLE, A_REQ, A_WAIT, A_DECIDE, A_DONE} astate_e;
  astate_e state;

  logic signed [S_W-1:0]   score [N];
  logic signed [SUM_W-1:0] total;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      idx   <= '0;
      total <= '0;
      sigma <= '0;
      for (int i = 0; i < N; i++) score[i] <= '0;
    end else begin
      unique case (state)
        A_IDLE: if (start) begin
          idx   <= '0;
          total <= '0;
          state <= A_REQ;
        end
        A_REQ:  state <= A_WAIT;
        A_WAIT: if (core_done) begin
          score[idx] <= e_scalar;
          total      <= total + SUM_W'(e_scalar);
          if (idx == ($clog2(N))'(N - 1)) state <= A_DECIDE;
          else begin
            idx   <= idx + 1'b1;
            state <= A_REQ;
          end
        end
        A_DECIDE: begin
          for (int i = 0; i < N; i++)
            sigma[i] <= (SUM_W'(score[i]) * N_S) >= total;
          state <= A_DONE;
        end
        A_DONE:  state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

  assign core_req = (state == A_REQ);
  assign busy     = (state != A_IDLE);
  assign done     = (state == A_DONE);

endmodule
