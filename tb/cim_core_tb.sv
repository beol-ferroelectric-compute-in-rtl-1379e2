// cim_core_tb: programs a random 32 x 32 coupling matrix (-4..+4) into the
// CiM macro, then runs random ternary VMMs and random 1/0 VMVs and compares
// e_vec = J x and e_scalar = q^T J v with products computed here. It also
// checks the latencies: done must follow the accepting edge after
// M_BITS+3 edges for a VMV, 2*(M_BITS+3) for a VMM, and M_BITS*(PC+1)
// for the programming of one element. Finally the scan-chain test path is
// used to read single rows slot by slot, each ADC code must be the stored
// cell bit.
module cim_core_tb;
  import ising_pkg::*;
  localparam int N = 32, PC = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_req = 0, op_req = 0;
  logic [4:0] prog_row, prog_col;
  logic signed [7:0] prog_val;
  cim_op_e op;
  trit_t xt [N];
  logic [N-1:0] q, v;
  logic busy, done;
  logic test_en = 0;
  logic [2:0] test_sel;
  logic [N-1:0] test_wl;
  logic [N*8-1:0] test_bl;
  logic [5:0] adc_code [N];
  logic signed [15:0] e_vec [N];
  logic signed [23:0] e_scalar;
  int J [N][N];
  int checks = 0, failures = 0;

  cim_core #(.N(N), .PROG_CYCLES(PC)) dut (
    .clk(clk), .rst_n(rst_n), .prog_req(prog_req), .prog_row(prog_row), .prog_col(prog_col),
    .prog_val(prog_val), .test_en(test_en), .test_sel(test_sel), .test_wl(test_wl),
    .test_bl(test_bl), .adc_code(adc_code), .op_req(op_req), .op(op), .xt(xt), .q(q), .v(v),
    .busy(busy), .done(done), .e_vec(e_vec), .e_scalar(e_scalar));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue a request and return the number of edges until done is seen.
  task automatic wait_done(output int lat);
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!done && lat < 10000);
  endtask

  initial begin
    int lat, acc;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        J[r][c] = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 8) - 4 : 0;
        prog_row = 5'(r); prog_col = 5'(c); prog_val = 8'(J[r][c]);
        prog_req = 1; @(posedge clk); #1; prog_req = 0;
        wait_done(lat);
        if (r == 0 && c == 0) begin
          checks++;
          if (lat != M_BITS * (PC + 1)) begin failures++; $display("prog latency %0d", lat); end
        end
      end
    for (int t = 0; t < 60; t++) begin
      // ternary VMM
      op = OP_VMM;
      foreach (xt[j]) xt[j] = trit_t'(int'($urandom_range(0, 2)) - 1);
      op_req = 1; @(posedge clk); #1; op_req = 0;
      wait_done(lat);
      checks++;
      if (lat != 2 * (M_BITS + 3)) begin failures++; $display("VMM latency %0d", lat); end
      for (int c = 0; c < N; c++) begin
        acc = 0;
        for (int r = 0; r < N; r++) acc += int'(xt[r]) * J[r][c];
        checks++;
        if (int'(e_vec[c]) != acc) begin
          failures++;
          if (failures < 10) $display("VMM col %0d got %0d exp %0d", c, e_vec[c], acc);
        end
      end
      // VMV
      op = OP_VMV; q = $urandom; v = $urandom;
      op_req = 1; @(posedge clk); #1; op_req = 0;
      wait_done(lat);
      checks++;
      if (lat != M_BITS + 3) begin failures++; $display("VMV latency %0d", lat); end
      acc = 0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) acc += (q[r] && v[c]) ? J[r][c] : 0;
      checks++;
      if (int'(e_scalar) != acc) begin failures++; $display("VMV got %0d exp %0d", e_scalar, acc); end
    end
    // test access: read single rows, one slot at a time
    test_en = 1;
    test_bl = '1;
    for (int t = 0; t < 40; t++) begin
      int r, s;
      logic [7:0] bits;
      r = $urandom_range(0, N - 1); s = $urandom_range(0, 7);
      test_wl = N'(1) << r; test_sel = 3'(s);
      @(posedge clk); @(posedge clk); #1;
      for (int g = 0; g < N; g++) begin
        bits = encode_j(8'(J[r][g]), ENC_THERMO);
        checks++;
        if (adc_code[g] != 6'(bits[s])) failures++;
      end
      checks++;
      if (!busy) failures++;
    end
    test_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
