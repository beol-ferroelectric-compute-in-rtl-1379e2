// fefet_ising_machine_tb: end-to-end test of the Ising machine at its
// default size (32 spins, 32 x 256 array, 1 us = 100-cycle program pulses,
// 20 light-SB iterations).
//
// For each of two random Max-Cut problems shaped like the paper's
// demonstration (32 nodes, about 10 % edge density, integer weights in
// {-4..-1, 1..4}) it loads J = -W element by element, starts the solver and
// compares
//   - init_sigma with the attention-inspired initialization computed here
//     (S_i = Q_i^T J V_i, spin +1 where S_i >= mean S), and
//   - sigma with a real-valued reference of the light-SB iterations,
// and prints the cut values. The second problem overwrites the first, so
// cells are reprogrammed in both directions. It also checks that a program
// pulse lasts 100 cycles, checks the solve latency (920 cycles: 418 for
// the 32 scores, 501 for the 20 light-SB iterations; the published chip
// reports under 900 ns, a figure this clocked design does not aim for) and
// counts the mechanisms of the design (writing
// 1 and 0 cells, VMV operations, both VMM phases, zero positions skipped by
// the VMM, both initial spin values, momenta quantised to zero, the load,
// initialization and SB modes, SPI test access); each must occur at least
// once. The SPI test frames select one row and a column slot and the ADC
// codes must equal the stored cell bits; each frame must read back the
// previous one on MISO.
module fefet_ising_machine_tb;
  import ising_pkg::*;
  localparam int N = 32, ITERS = 20;
  // encodings of the internal states watched below (declaration order)
  localparam int CORE_S_RUN = 4, TOP_T_IDLE = 0, TOP_T_INIT = 2, TOP_T_SB = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic j_we = 0, start = 0;
  logic [4:0] j_row, j_col;
  logic signed [7:0] j_val;
  logic j_ready, busy, done;
  logic [N-1:0] init_sigma, sigma;
  logic [7:0] iter;
  logic spi_sck = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic [5:0] test_code [N];

  fefet_ising_machine dut (
    .clk(clk), .rst_n(rst_n), .j_we(j_we), .j_row(j_row), .j_col(j_col), .j_val(j_val),
    .j_ready(j_ready), .start(start), .busy(busy), .done(done),
    .init_sigma(init_sigma), .sigma(sigma), .iter(iter),
    .spi_sck(spi_sck), .spi_cs_n(spi_cs_n), .spi_mosi(spi_mosi), .spi_miso(spi_miso),
    .test_code(test_code));

  localparam int CHAIN = 4 + N + N * 8;

  // One SPI frame (mode 0, 8 clk cycles per SPI bit), first bit = frame[CHAIN-1];
  // returns the bits read on MISO in the same order.
  task automatic spi_frame(input logic [CHAIN-1:0] frame, output logic [CHAIN-1:0] rd);
    spi_cs_n = 0;
    repeat (8) @(posedge clk);
    for (int b = CHAIN - 1; b >= 0; b--) begin
      spi_mosi = frame[b];
      repeat (4) @(posedge clk);
      spi_sck = 1; rd[b] = spi_miso;
      repeat (4) @(posedge clk);
      spi_sck = 0;
    end
    repeat (4) @(posedge clk);
    spi_cs_n = 1;
    repeat (8) @(posedge clk);
    #1;
  endtask

  int W [N][N];
  int J [N][N];
  int checks = 0, failures = 0;
  int n_w1 = 0, n_w0 = 0, n_vmv = 0, n_vmm_pos = 0, n_vmm_neg = 0, n_zero_in = 0;
  int n_test = 0, n_y0 = 0, n_load = 0, n_init = 0, n_sb = 0, pulse_len = 0, first_pulse = -1;
  int solve_cycles, init_cycles = 0, sb_cycles = 0;

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.u_array.pg_fire) begin
      if (|dut.u_core.u_array.pg_val) n_w1++; else n_w0++;
    end
    if (dut.u_core.u_array.pg_any) pulse_len++;
    else begin
      if (pulse_len != 0 && first_pulse < 0) first_pulse = pulse_len;
      pulse_len = 0;
    end
    if (dut.u_core.latch_out && dut.u_core.op_q == OP_VMV) n_vmv++;
    if (dut.u_core.hold_pos) n_vmm_pos++;
    if (dut.u_core.latch_out && dut.u_core.op_q == OP_VMM) n_vmm_neg++;
    if (int'(dut.u_core.state) == CORE_S_RUN && dut.u_core.op_q == OP_VMM)
      for (int j = 0; j < N; j++) if (dut.u_core.xt_q[j] == T_ZERO) begin n_zero_in++; break; end
    if (dut.u_sb.p_step)
      for (int j = 0; j < N; j++) if (dut.u_sb.y_new[j] == T_ZERO) begin n_y0++; break; end
    if (int'(dut.state) == TOP_T_IDLE && j_ready && j_we) n_load++;
    if (dut.init_start) n_init++;
    if (dut.sb_start) n_sb++;
    if (int'(dut.state) == TOP_T_INIT) init_cycles++;
    if (int'(dut.state) == TOP_T_SB) sb_cycles++;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tq(real a);
    if (a >= 0.5) return 1;
    if (a <= -0.5) return -1;
    return 0;
  endfunction

  function automatic int cut(logic [N-1:0] s);
    int c = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if (s[i] != s[j]) c += W[i][j];
    return c;
  endfunction

  task automatic run_problem(int seed_edges);
    int S [N];
    real mean, p;
    int x [N], y [N], jx [N];
    logic [N-1:0] ref_init, ref_sig;
    int edges = 0;
    // graph
    for (int i = 0; i < N; i++) W[i][i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        if ($urandom_range(0, 99) < 10 + seed_edges) begin
          W[i][j] = $urandom_range(1, 4) * (($urandom_range(0, 1) == 1) ? 1 : -1);
          edges++;
        end else W[i][j] = 0;
        W[j][i] = W[i][j];
      end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) J[i][j] = -W[i][j];
    // load
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        while (!j_ready) begin @(posedge clk); #1; end
        j_row = 5'(r); j_col = 5'(c); j_val = 8'(J[r][c]); j_we = 1;
        @(posedge clk); #1; j_we = 0;
        @(posedge clk); #1;
      end
    while (!j_ready) begin @(posedge clk); #1; end
    // reference initialization
    mean = 0;
    for (int i = 0; i < N; i++) begin
      S[i] = 0;
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N; b++)
          if (J[a][i] == 0 && J[b][i] != 0) S[i] += J[a][b];
      mean += real'(S[i]) / N;
    end
    for (int i = 0; i < N; i++) ref_init[i] = (real'(S[i]) >= mean - 1e-9);
    // reference light SB
    for (int i = 0; i < N; i++) begin x[i] = ref_init[i] ? 1 : -1; y[i] = 0; end
    ref_sig = ref_init; p = 0.0;
    for (int t = 0; t < ITERS; t++) begin
      for (int c = 0; c < N; c++) begin
        jx[c] = 0;
        for (int r = 0; r < N; r++) jx[c] += x[r] * J[r][c];
      end
      for (int i = 0; i < N; i++) begin
        y[i] = tq(real'(y[i]) - (1.0 - p) * real'(x[i]) + (26.0 / 256.0) * real'(jx[i]));
        x[i] = tq(real'(x[i]) + real'(y[i]));
        if (x[i] != 0) ref_sig[i] = (x[i] > 0);
      end
      p = (p + 12.0 / 256.0 > 1.0) ? 1.0 : p + 12.0 / 256.0;
    end
    // solve
    init_cycles = 0; sb_cycles = 0;
    start = 1; @(posedge clk); #1; start = 0;
    solve_cycles = 1;
    while (!done) begin @(posedge clk); #1; solve_cycles++; end
    $display("solve latency %0d cycles: init %0d, light SB %0d", solve_cycles, init_cycles, sb_cycles);
    // latency: a score is a request cycle plus an 11-cycle VMV plus one
    // cycle to store it; an SB iteration is a request plus a 22-cycle VMM
    // plus the update and the parameter step
    checks += 3;
    if (init_cycles != N * (1 + (M_BITS + 3) + 1) + 2) failures++;
    if (sb_cycles != ITERS * (1 + 2 * (M_BITS + 3) + 2) + 1) failures++;
    if (solve_cycles != init_cycles + sb_cycles + 1) failures++;
    checks += 3;
    if (init_sigma != ref_init) begin failures++; $display("init_sigma %h expected %h", init_sigma, ref_init); end
    if (sigma != ref_sig) begin failures++; $display("sigma %h expected %h", sigma, ref_sig); end
    if (int'(iter) != ITERS) failures++;
    $display("problem: %0d edges, cut after init %0d, after light SB %0d", edges, cut(init_sigma), cut(sigma));
  endtask

  initial begin
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    run_problem(0);
    run_problem(5);
    // SPI scan-chain test access: read rows of the array cell by cell
    for (int t = 0; t < 6; t++) begin
      logic [CHAIN-1:0] fr, rd, prev;
      logic [7:0] bits;
      int r, sl;
      r = $urandom_range(0, N - 1); sl = $urandom_range(0, 7);
      fr = '0;
      fr[CHAIN-1] = 1'b1;
      fr[CHAIN-2 -: 3] = 3'(sl);
      fr[N*8 + r] = 1'b1;
      fr[N*8-1:0] = '1;
      spi_frame(fr, rd);
      if (t > 0) begin
        checks++;
        if (rd != prev) begin failures++; $display("scan chain read-back mismatch"); end
      end
      prev = fr;
      checks++;
      if (j_ready) failures++;
      for (int g = 0; g < N; g++) begin
        bits = encode_j(8'(J[r][g]), ENC_THERMO);
        checks++;
        if (test_code[g] != 6'(bits[sl])) failures++;
      end
      n_test++;
    end
    begin
      logic [CHAIN-1:0] rd;
      spi_frame('0, rd);
    end
    checks++;
    if (!j_ready) begin failures++; $display("array not released after test access"); end
    checks++;
    if (first_pulse != 100) begin failures++; $display("program pulse %0d cycles", first_pulse); end
    $display("mechanisms: write1=%0d write0=%0d vmv=%0d vmm_pos=%0d vmm_neg=%0d zero_x=%0d y_zero=%0d load=%0d init=%0d sb=%0d",
             n_w1, n_w0, n_vmv, n_vmm_pos, n_vmm_neg, n_zero_in, n_y0, n_load, n_init, n_sb);
    checks += 11;
    if (n_test == 0) failures++;
    if (n_w1 == 0) failures++;
    if (n_w0 == 0) failures++;
    if (n_vmv != 2 * N) failures++;
    if (n_vmm_pos != 2 * ITERS) failures++;
    if (n_vmm_neg != 2 * ITERS) failures++;
    if (n_zero_in == 0) failures++;
    if (n_y0 == 0) failures++;
    if (n_load != 2 * N * N) failures++;
    if (n_init != 2) failures++;
    if (n_sb != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
