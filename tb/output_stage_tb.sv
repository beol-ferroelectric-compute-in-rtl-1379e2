// output_stage_tb: checks the VMM result (stored positive-phase sums minus
// the negative-phase sums) and the VMV result (sum of all partial sums),
// and that the outputs hold between latches.
module output_stage_tb;
  import ising_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, hold_pos = 0, latch_out = 0;
  cim_op_e op;
  logic signed [15:0] psum [N], e_vec [N], pos [N], neg [N];
  logic signed [23:0] e_scalar;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  output_stage #(.N(N), .IN_W(16), .SUM_W(24)) dut (.clk(clk), .rst_n(rst_n), .op(op), .psum(psum),
    .hold_pos(hold_pos), .latch_out(latch_out), .e_vec(e_vec), .e_scalar(e_scalar));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      // VMM
      op = OP_VMM;
      foreach (psum[g]) begin psum[g] = 16'($urandom_range(0, 256)) - 16'sd128; pos[g] = psum[g]; end
      hold_pos = 1; @(posedge clk); #1; hold_pos = 0;
      foreach (psum[g]) begin psum[g] = 16'($urandom_range(0, 256)) - 16'sd128; neg[g] = psum[g]; end
      latch_out = 1; @(posedge clk); #1; latch_out = 0;
      foreach (psum[g]) psum[g] = 16'($urandom);
      @(posedge clk); #1;
      for (int g = 0; g < N; g++) begin
        checks++;
        if (e_vec[g] != 16'(pos[g] - neg[g])) failures++;
      end
      // VMV
      op = OP_VMV; tot = 0;
      foreach (psum[g]) begin psum[g] = 16'($urandom_range(0, 2000)) - 16'sd1000; tot += int'(psum[g]); end
      latch_out = 1; @(posedge clk); #1; latch_out = 0;
      checks++;
      if (e_scalar != 24'(tot)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
