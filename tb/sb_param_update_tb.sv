// sb_param_update_tb: checks that p starts at 0 after clear, rises by
// P_STEP per step pulse, ignores cycles without a step and saturates at DELTA.
module sb_param_update_tb;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [15:0] p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sb_param_update #(.DELTA(256), .P_STEP(12)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .step(step), .p(p));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      clear = 1; @(posedge clk); #1; clear = 0;
      e = 0;
      checks++; if (p != 0) failures++;
      for (int k = 0; k < 40; k++) begin
        step = (run == 0) ? 1'b1 : 1'($urandom);
        if (step) e = (e + 12 > 256) ? 256 : e + 12;
        @(posedge clk); #1;
        checks++;
        if (int'(p) != e) failures++;
      end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
