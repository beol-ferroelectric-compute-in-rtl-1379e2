// shift_add_tb: runs random code sequences through a thermometer-coded and
// a binary-coded accumulator and compares the partial sums with sums the
// testbench forms from the slot weights (thermometer: +1 for slots 0..3,
// -1 for slots 4..7; binary: +2^b, with -2^7 for slot 7).
module shift_add_tb;
  import ising_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [2:0] slot;
  logic [5:0] code;
  logic signed [15:0] ps_t, ps_b;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shift_add #(.BITS(6), .ACC_W(16), .ENC(ENC_THERMO)) dut_t (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .slot(slot), .code(code), .psum(ps_t));
  shift_add #(.BITS(6), .ACC_W(16), .ENC(ENC_BINARY)) dut_b (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .slot(slot), .code(code), .psum(ps_b));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rt, rb;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      clear = 1; @(posedge clk); #1; clear = 0;
      rt = 0; rb = 0;
      for (int s = 0; s < 8; s++) begin
        slot = 3'(s); code = 6'($urandom_range(0, 32)); en = 1'($urandom);
        if (en) begin
          rt += (s < 4) ? int'(code) : -int'(code);
          rb += (s == 7) ? -(int'(code) * 128) : int'(code) * (1 << s);
        end
        @(posedge clk); #1;
      end
      en = 0;
      checks += 2;
      if (ps_t != 16'(rt)) failures++;
      if (ps_b != 16'(rb)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
