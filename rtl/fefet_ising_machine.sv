// fefet_ising_machine: FeFET compute-in-memory Ising machine, top level.
//
// Solves an N-spin Ising problem held as a signed coupling matrix J (for
// Max-Cut, J = -W for edge weights W) in two steps, both accelerated by the
// same FeFET crossbar:
//   1. attention-inspired initialization: N vector-matrix-vector products
//      S_i = Q_i^T J V_i give each spin a score; spins scoring at or above
//      the mean start at +1, the rest at -1;
//   2. light simulated bifurcation: ITERS iterations, each one ternary
//      vector-matrix product JX on the array plus a ternary update of
//      momentum and position.
// Loading: while j_ready is high, a j_we pulse writes element J[j_row][j_col]
// (-4..+4 with the default thermometer coding) into the array (M_BITS cell
// program pulses) and its connection bit into qkv_gen; every element must be
// written once, zeros included, because the cells start unknown.
// Solving: a start pulse while j_ready runs both steps; done pulses when
// sigma (bit 1 = spin +1) holds the solution, init_sigma the initial state
// and iter the number of light-SB iterations run.
// Test access: an SPI frame into the scan chain (spi_scan) can hand the
// idle array to external control; test_code then shows the ADC codes of
// the selected lines. j_ready is low meanwhile.
// Everything except the array and ADC models is synthesizable; clock and
// reset style are this design's choices.
// Reset: rst_n is an asynchronous active-low reset. Lint reports it as used
// both asynchronously and synchronously only because the handshake
// assertion below names it in its disable condition; no flop uses it as a
// synchronous input.
module fefet_ising_machine
  import ising_pkg::*;
#(
  parameter int unsigned N           = N_SPINS,
  parameter int unsigned PROG_CYCLES = 100,
  parameter int unsigned ITERS       = 20
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      j_we,
  input  logic [$clog2(N)-1:0]      j_row,
  input  logic [$clog2(N)-1:0]      j_col,
  input  logic signed [JVAL_W-1:0]  j_val,
  output logic                      j_ready,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic [N-1:0]              init_sigma,
  output logic [N-1:0]              sigma,
  output logic [7:0]                iter,
  // SPI test access (scan chain)
  input  logic                      spi_sck,
  input  logic                      spi_cs_n,
  input  logic                      spi_mosi,
  output logic                      spi_miso,
  output logic [ADC_BITS-1:0]       test_code [N]
);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_INIT, T_SB, T_DONE} tstate_e;
  tstate_e state;

  logic                      core_busy, core_done, core_op_req;
  cim_op_e                   core_op;
  logic signed [PSUM_W-1:0]  e_vec [N];
  logic signed [S_W-1:0]     e_scalar;
  logic [N-1:0]              q, v;
  logic [$clog2(N)-1:0]      idx;
  logic                      init_start, init_busy, init_done, init_req;
  logic                      sb_start, sb_busy, sb_done, sb_req;
  trit_t                     xt [N];
  logic                      load_go;
  logic                      test_en;
  logic [2:0]                test_sel;
  logic [N-1:0]              test_wl;
  logic [N*M_BITS-1:0]       test_bl;

  assign j_ready = (state == T_IDLE) && !core_busy;
  assign load_go = j_ready && j_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE;
    end else begin
      unique case (state)
        T_IDLE: begin
          if (load_go)                    state <= T_LOAD;
          else if (j_ready && start)      state <= T_INIT;
        end
        T_LOAD:  if (core_done) state <= T_IDLE;
        T_INIT:  if (init_done) state <= T_SB;
        T_SB:    if (sb_done)   state <= T_DONE;
        T_DONE:  state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  assign init_start  = (state == T_IDLE) && j_ready && start && !j_we;
  assign sb_start    = (state == T_INIT) && init_done;
  assign core_op     = (state == T_SB) ? OP_VMM : OP_VMV;
  assign core_op_req = (state == T_INIT) ? init_req : (state == T_SB) ? sb_req : 1'b0;
  assign busy        = (state != T_IDLE) || core_busy;
  assign done        = (state == T_DONE);

  cim_core #(.N(N), .PROG_CYCLES(PROG_CYCLES)) u_core (
    .clk(clk), .rst_n(rst_n),
    .prog_req(load_go), .prog_row(j_row), .prog_col(j_col), .prog_val(j_val),
    .test_en(test_en), .test_sel(test_sel), .test_wl(test_wl), .test_bl(test_bl),
    .adc_code(test_code),
    .op_req(core_op_req), .op(core_op), .xt(xt), .q(q), .v(v),
    .busy(core_busy), .done(core_done), .e_vec(e_vec), .e_scalar(e_scalar)
  );

  spi_scan #(.ROWS(N), .COLS(N * M_BITS)) u_spi (
    .clk(clk), .rst_n(rst_n), .spi_sck(spi_sck), .spi_cs_n(spi_cs_n), .spi_mosi(spi_mosi),
    .spi_miso(spi_miso), .test_en(test_en), .mux_sel(test_sel), .wl_sel(test_wl), .bl_sel(test_bl)
  );

  qkv_gen #(.N(N)) u_qkv (
    .clk(clk), .we(load_go), .wr_row(j_row), .wr_col(j_col), .wr_conn(j_val != '0),
    .idx(idx), .q(q), .v(v)
  );

  attention_init #(.N(N)) u_init (
    .clk(clk), .rst_n(rst_n), .start(init_start), .busy(init_busy), .done(init_done),
    .idx(idx), .core_req(init_req), .core_done(core_done && state == T_INIT),
    .e_scalar(e_scalar), .sigma(init_sigma)
  );

  light_sb #(.N(N), .ITERS(ITERS)) u_sb (
    .clk(clk), .rst_n(rst_n), .start(sb_start), .sigma_init(init_sigma),
    .busy(sb_busy), .done(sb_done), .core_req(sb_req), .xt(xt),
    .core_done(core_done && state == T_SB), .e_vec(e_vec),
    .sigma(sigma), .iter(iter)
  );

  // Only the controller of the current step may be active.
  a_one_controller: assert property (@(posedge clk) disable iff (!rst_n)
    !(init_busy && sb_busy))
    else $error("fefet_ising_machine: initialization and SB active together");

endmodule
