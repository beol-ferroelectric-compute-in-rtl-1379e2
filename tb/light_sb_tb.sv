// light_sb_tb: acts as the CiM core (computing J x for its own random
// matrix after a random delay) and runs the light-SB engine from random
// initial spins. A real-valued reference of the update
//   Y <- T(Y - (1 - p) X + zeta J X),  X <- T(X + Y),  p += 12/256 per iteration,
// with T rounding to {-1,0,+1} at +/-0.5, is stepped alongside: at every
// request the applied X must match the reference, and at the end sigma,
// the iteration count and the number of requests (one per iteration) must.
module light_sb_tb;
  import ising_pkg::*;
  localparam int N = 32, ITERS = 20;
  logic clk = 0, rst_n = 0, start = 0, core_done = 0;
  logic [N-1:0] sigma_init, sigma;
  logic busy, done, core_req;
  trit_t xt [N];
  logic signed [15:0] e_vec [N];
  logic [7:0] iter;
  int J [N][N];
  int rx [N], ry [N], rjx [N];
  logic rsig [N];
  real rp;
  int checks = 0, failures = 0, nreq, zero_seen;
  always #5 clk = ~clk;

  light_sb #(.N(N), .ITERS(ITERS)) dut (.clk(clk), .rst_n(rst_n), .start(start), .sigma_init(sigma_init),
    .busy(busy), .done(done), .core_req(core_req), .xt(xt), .core_done(core_done), .e_vec(e_vec),
    .sigma(sigma), .iter(iter));

  function automatic int tq(real a);
    if (a >= 0.5) return 1;
    if (a <= -0.5) return -1;
    return 0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core model plus reference step
  always @(posedge clk) begin
    if (core_req) begin
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(xt[i]) != rx[i]) failures++;
        if (rx[i] == 0) zero_seen++;
      end
      for (int c = 0; c < N; c++) begin
        rjx[c] = 0;
        for (int r = 0; r < N; r++) rjx[c] += rx[r] * J[r][c];
      end
      nreq++;
      repeat ($urandom_range(2, 20)) @(posedge clk);
      #1;
      foreach (e_vec[c]) e_vec[c] = 16'(rjx[c]);
      core_done = 1;
      for (int i = 0; i < N; i++) begin
        ry[i] = tq(real'(ry[i]) - (1.0 - rp) * real'(rx[i]) + (26.0 / 256.0) * real'(rjx[i]));
        rx[i] = tq(real'(rx[i]) + real'(ry[i]));
        if (rx[i] != 0) rsig[i] = (rx[i] > 0);
      end
      rp = (rp + 12.0 / 256.0 > 1.0) ? 1.0 : rp + 12.0 / 256.0;
      @(posedge clk); #1 core_done = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    zero_seen = 0;
    for (int t = 0; t < 8; t++) begin
      for (int r = 0; r < N; r++)
        for (int c = r; c < N; c++) begin
          J[r][c] = (r != c && $urandom_range(0, 5) == 0) ? $urandom_range(0, 8) - 4 : 0;
          J[c][r] = J[r][c];
        end
      sigma_init = $urandom;
      for (int i = 0; i < N; i++) begin
        rx[i] = sigma_init[i] ? 1 : -1; ry[i] = 0; rsig[i] = sigma_init[i];
      end
      rp = 0.0; nreq = 0;
      @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      checks += 2;
      if (nreq != ITERS) failures++;
      if (int'(iter) != ITERS) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sigma[i] != rsig[i]) failures++;
      end
    end
    checks++;
    if (zero_seen == 0) begin failures++; $display("no zero position was ever applied"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
