// qkv_gen_tb: writes a random connection pattern and checks, for every
// spin index, that Q_i marks exactly the unconnected rows and V_i the
// connected ones.
module qkv_gen_tb;
  localparam int N = 32;
  logic clk = 0, we = 0, wr_conn;
  logic [4:0] wr_row, wr_col, idx;
  logic [N-1:0] q, v;
  logic conn [N][N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  qkv_gen #(.N(N)) dut (.clk(clk), .we(we), .wr_row(wr_row), .wr_col(wr_col), .wr_conn(wr_conn),
    .idx(idx), .q(q), .v(v));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        conn[r][c] = ($urandom_range(0, 3) == 0);
        wr_row = 5'(r); wr_col = 5'(c); wr_conn = conn[r][c]; we = 1;
        @(posedge clk); #1;
      end
    we = 0;
    for (int i = 0; i < N; i++) begin
      idx = 5'(i); #1;
      for (int j = 0; j < N; j++) begin
        checks += 2;
        if (q[j] != !conn[j][i]) failures++;
        if (v[j] != conn[j][i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
