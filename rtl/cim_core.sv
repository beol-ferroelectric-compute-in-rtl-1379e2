// cim_core: the compute-in-memory macro with its read/write peripherals and
// sequencer.
//
// Datapath (the paper's array architecture): input encoder -> WL and BL
// drivers -> N x (N*M_BITS) FeFET crossbar -> one column multiplexer and one
// ADC per J element group -> shift-and-add partial sums -> output stage.
//
// Programming: prog_req with (prog_row, prog_col, prog_val) writes the J
// element at row prog_row, column group prog_col. The element is encoded
// into M_BITS cell bits and each cell gets its own program pulse of
// PROG_CYCLES cycles followed by one idle cycle, so one element takes
// M_BITS*(PROG_CYCLES+1) cycles. Cells are written one at a time (a choice
// of this design; the paper only gives the pulse polarity and width).
//
// Compute: op_req starts an operation with the inputs sampled on that edge.
// A phase is one clear cycle, M_BITS conversion cycles (MUX select 0..M-1,
// all ADCs converting in parallel), one cycle to accumulate the last code and
// one latch cycle. OP_VMV runs one phase and yields e_scalar = q^T J v;
// OP_VMM runs a positive-input and a negative-input phase for ternary xt and
// yields e_vec = J xt. done pulses for one cycle phases*(M_BITS+3) edges
// after the edge that accepted op_req; results hold until the next
// operation. Requests are accepted only while busy is low, which includes
// the done cycle, so a new request may follow done directly.
//
// Test access: while test_en is high and no operation runs, the word and
// bit lines take the vectors test_wl and test_bl at read bias, the
// multiplexers select slot test_sel and every ADC converts each cycle;
// adc_code shows the codes one cycle later. Requests are held off (busy)
// during test access. This path serves the scan chain (spi_scan).
// Reset: rst_n is an asynchronous active-low reset. Lint reports it as used
// both asynchronously and synchronously only because the handshake
// assertion below names it in its disable condition; no flop uses it as a
// synchronous input.
module cim_core
  import ising_pkg::*;
#(
  parameter int unsigned N           = N_SPINS,
  parameter int unsigned PROG_CYCLES = 100,
  parameter int unsigned I_CELL_NA   = 130,
  parameter jenc_e       ENC         = ENC_THERMO
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // programming
  input  logic                      prog_req,
  input  logic [$clog2(N)-1:0]      prog_row,
  input  logic [$clog2(N)-1:0]      prog_col,
  input  logic signed [JVAL_W-1:0]  prog_val,
  // compute
  input  logic                      op_req,
  input  cim_op_e                   op,
  input  trit_t                     xt [N],
  input  logic [N-1:0]              q,
  input  logic [N-1:0]              v,
  // scan-chain test access (array read by the ADCs while idle)
  input  logic                      test_en,
  input  logic [$clog2(M_BITS)-1:0] test_sel,
  input  logic [N-1:0]              test_wl,
  input  logic [N*M_BITS-1:0]       test_bl,
  output logic [ADC_BITS-1:0]       adc_code [N],
  // status and results
  output logic                      busy,
  output logic                      done,
  output logic signed [PSUM_W-1:0]  e_vec [N],
  output logic signed [S_W-1:0]     e_scalar
);

  localparam int unsigned COLS = N * M_BITS;
  localparam int unsigned SW   = $clog2(M_BITS);

  typedef enum logic [2:0] {S_IDLE, S_PROG, S_PGAP, S_START, S_RUN, S_DRAIN, S_LATCH, S_DONE} state_e;
  state_e state;

  // latched request
  cim_op_e                 op_q;
  trit_t                   xt_q [N];
  logic [N-1:0]            q_q, v_q;
  logic [$clog2(N)-1:0]    row_q, col_q;
  logic [M_BITS-1:0]       bits_q;
  logic [SW-1:0]           cnt;          // cell slot / MUX select
  logic                    ph;           // VMM phase
  logic [$clog2(PROG_CYCLES+1)-1:0] pcnt;

  // datapath nets
  drv_mode_e               mode;
  logic [N-1:0]            wl_x, enc_wl;
  logic [COLS-1:0]         bl_y, enc_bl;
  logic [SW-1:0]           mux_sel;
  logic                    test_act;
  wl_drive_e               wl [N];
  bl_drive_e               bl [COLS];
  logic [I_W-1:0]          i_col [COLS];
  logic [I_W-1:0]          i_mux [N];
  logic [ADC_BITS-1:0]     code  [N];
  logic                    adc_valid [N];
  logic signed [PSUM_W-1:0] psum [N];
  logic                    conv, acc_clear, hold_pos, latch_out;
  logic [SW-1:0]           slot_d;
  logic [$clog2(COLS)-1:0] prog_col_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      op_q   <= OP_VMV;
      q_q    <= '0;
      v_q    <= '0;
      row_q  <= '0;
      col_q  <= '0;
      bits_q <= '0;
      cnt    <= '0;
      ph     <= 1'b0;
      pcnt   <= '0;
      slot_d <= '0;
      for (int j = 0; j < N; j++) xt_q[j] <= T_ZERO;
    end else begin
      slot_d <= cnt;
      unique case (state)
        S_IDLE, S_DONE: begin
          state <= S_IDLE;
          cnt <= '0;
          ph  <= 1'b0;
          if (test_en) begin
            state <= S_IDLE;
          end else if (prog_req) begin
            row_q  <= prog_row;
            col_q  <= prog_col;
            bits_q <= encode_j(prog_val, ENC);
            pcnt   <= '0;
            state  <= S_PROG;
          end else if (op_req) begin
            op_q  <= op;
            xt_q  <= xt;
            q_q   <= q;
            v_q   <= v;
            state <= S_START;
          end
        end
        S_PROG: begin
          if (pcnt == ($bits(pcnt))'(PROG_CYCLES - 1)) state <= S_PGAP;
          else pcnt <= pcnt + 1'b1;
        end
        S_PGAP: begin
          pcnt <= '0;
          if (cnt == SW'(M_BITS - 1)) state <= S_DONE;
          else begin
            cnt   <= cnt + 1'b1;
            state <= S_PROG;
          end
        end
        S_START: begin
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (cnt == SW'(M_BITS - 1)) state <= S_DRAIN;
          else cnt <= cnt + 1'b1;
        end
        S_DRAIN: state <= S_LATCH;
        S_LATCH: begin
          if (op_q == OP_VMM && !ph) begin
            ph    <= 1'b1;
            state <= S_START;
          end else begin
            state <= S_DONE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign test_act = test_en && (state == S_IDLE || state == S_DONE);

  always_comb begin
    unique case (state)
      S_PROG:                  mode = DRV_PROG;
      S_START, S_RUN, S_DRAIN: mode = DRV_READ;
      default:                 mode = test_act ? DRV_READ : DRV_IDLE;
    endcase
  end

  assign wl_x      = test_act ? test_wl : enc_wl;
  assign bl_y      = test_act ? test_bl : enc_bl;
  assign mux_sel   = test_act ? test_sel : cnt;
  assign adc_code  = code;
  assign conv      = (state == S_RUN) || test_act;
  assign acc_clear = (state == S_START);
  assign hold_pos  = (state == S_LATCH) && (op_q == OP_VMM) && !ph;
  assign latch_out = (state == S_LATCH) && !hold_pos;
  assign busy      = ((state != S_IDLE) && (state != S_DONE)) || test_en;
  assign done      = (state == S_DONE);
  assign prog_col_line = ($clog2(COLS))'(int'(col_q) * M_BITS + int'(cnt));

  input_encoder #(.N(N)) u_enc (
    .op(op_q), .phase(ph), .xt(xt_q), .q(q_q), .v(v_q), .wl_x(enc_wl), .bl_y(enc_bl)
  );

  wl_driver #(.ROWS(N)) u_wl (
    .mode(mode), .x(wl_x), .prog_row(row_q), .prog_bit(bits_q[cnt]), .wl(wl)
  );

  bl_driver #(.COLS(COLS)) u_bl (
    .mode(mode), .y(bl_y), .prog_col(prog_col_line), .bl(bl)
  );

  cim_array #(.ROWS(N), .COLS(COLS), .I_CELL_NA(I_CELL_NA), .PROG_CYCLES(PROG_CYCLES)) u_array (
    .clk(clk), .wl(wl), .bl(bl), .i_col(i_col)
  );

  col_mux #(.GROUPS(N), .WAYS(M_BITS)) u_mux (
    .sel(mux_sel), .i_col(i_col), .i_mux(i_mux)
  );

  for (genvar g = 0; g < N; g++) begin : g_chan
    adc #(.BITS(ADC_BITS), .LSB_NA(I_CELL_NA)) u_adc (
      .clk(clk), .rst_n(rst_n), .conv(conv), .i_in(i_mux[g]),
      .code(code[g]), .valid(adc_valid[g])
    );
    shift_add #(.BITS(ADC_BITS), .ACC_W(PSUM_W), .ENC(ENC)) u_sa (
      .clk(clk), .rst_n(rst_n), .clear(acc_clear), .en(adc_valid[g]),
      .slot(slot_d), .code(code[g]), .psum(psum[g])
    );
  end

  output_stage #(.N(N), .IN_W(PSUM_W), .SUM_W(S_W)) u_out (
    .clk(clk), .rst_n(rst_n), .op(op_q), .psum(psum),
    .hold_pos(hold_pos), .latch_out(latch_out),
    .e_vec(e_vec), .e_scalar(e_scalar)
  );

  // A request must not arrive while an operation is running.
  a_no_req_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (busy && !test_en) |-> !(prog_req || op_req))
    else $error("cim_core: request while busy");

endmodule
