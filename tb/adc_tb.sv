// adc_tb: checks rounding to the nearest LSB step, saturation at the top
// code, that the code appears one cycle after conv and that it holds while
// conv is low.
module adc_tb;
  import ising_pkg::*;
  localparam int BITS = 6, LSB = 130;
  logic clk = 0, rst_n = 0, conv = 0;
  logic [I_W-1:0] i_in = 0;
  logic [BITS-1:0] code;
  logic valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  adc #(.BITS(BITS), .LSB_NA(LSB)) dut (.clk(clk), .rst_n(rst_n), .conv(conv), .i_in(i_in), .code(code), .valid(valid));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_code, held;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      i_in = (t < 300) ? I_W'($urandom_range(0, 40 * LSB)) : I_W'($urandom);
      exp_code = (int'(i_in) + LSB / 2) / LSB;
      if (exp_code > 63) exp_code = 63;
      conv = 1;
      @(posedge clk); #1;
      conv = 0;
      checks++;
      if (!valid || code != BITS'(exp_code)) begin
        failures++;
        if (failures < 10) $display("i=%0d code=%0d exp=%0d", i_in, code, exp_code);
      end
      held = code;
      i_in = I_W'($urandom);
      @(posedge clk); #1;
      checks++;
      if (valid || code != BITS'(held)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
