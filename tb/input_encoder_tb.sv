// input_encoder_tb: random ternary and binary inputs; checks the word-line
// vector and the m-fold expanded bit-line vector for VMV and both VMM phases.
module input_encoder_tb;
  import ising_pkg::*;
  localparam int N = 32;
  cim_op_e op;
  logic phase;
  trit_t xt [N];
  logic [N-1:0] q, v, wl_x;
  logic [N*M_BITS-1:0] bl_y;
  int checks = 0, failures = 0;

  input_encoder #(.N(N)) dut (.op(op), .phase(phase), .xt(xt), .q(q), .v(v), .wl_x(wl_x), .bl_y(bl_y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] ew;
    for (int t = 0; t < 300; t++) begin
      op = cim_op_e'(t % 2); phase = 1'($urandom);
      q = $urandom; v = $urandom;
      foreach (xt[j]) xt[j] = trit_t'(int'($urandom_range(0, 2)) - 1);
      #1;
      for (int j = 0; j < N; j++)
        ew[j] = (op == OP_VMV) ? q[j] : (phase ? (xt[j] == -2'sd1) : (xt[j] == 2'sd1));
      checks++;
      if (wl_x != ew) failures++;
      for (int c = 0; c < N * M_BITS; c++) begin
        checks++;
        if (bl_y[c] != ((op == OP_VMV) ? v[c / 8] : 1'b1)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
