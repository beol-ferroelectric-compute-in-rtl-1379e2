// attention_init_tb: acts as the CiM core, answering each request with a
// score chosen by the testbench after a random delay, and checks that one
// request is made per spin in index order and that sigma_i = (S_i >= mean S)
// computed here in real arithmetic. Includes cases with scores equal to the
// mean and with negative scores.
module attention_init_tb;
  import ising_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, start = 0, core_done = 0;
  logic busy, done, core_req;
  logic [4:0] idx;
  logic signed [23:0] e_scalar;
  logic [N-1:0] sigma;
  int S [N];
  int checks = 0, failures = 0, nreq;
  always #5 clk = ~clk;

  attention_init #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .idx(idx), .core_req(core_req), .core_done(core_done), .e_scalar(e_scalar), .sigma(sigma));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core model
  always @(posedge clk) begin
    if (core_req) begin
      int i;
      i = int'(idx);
      if (i != nreq) begin failures++; $display("request for %0d, expected %0d", i, nreq); end
      checks++;
      nreq++;
      repeat ($urandom_range(1, 12)) @(posedge clk);
      #1 e_scalar = 24'(S[i]); core_done = 1;
      @(posedge clk); #1 core_done = 0;
    end
  end

  initial begin
    real mean;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      mean = 0;
      for (int i = 0; i < N; i++) begin
        S[i] = (t == 0) ? ((i % 2) ? 10 : 30) : ((t == 1) ? 7 : $urandom_range(0, 600) - 200);
        mean += real'(S[i]) / N;
      end
      nreq = 0;
      @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      checks++;
      if (nreq != N) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sigma[i] != (real'(S[i]) >= mean - 1e-9)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
