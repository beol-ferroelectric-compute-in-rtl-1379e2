// col_mux_tb: drives random column currents and checks that every group's
// output is column g*WAYS + sel for all select values.
module col_mux_tb;
  import ising_pkg::*;
  localparam int GROUPS = 32, WAYS = 8;
  logic [2:0] sel;
  logic [I_W-1:0] i_col [GROUPS*WAYS];
  logic [I_W-1:0] i_mux [GROUPS];
  int checks = 0, failures = 0;

  col_mux #(.GROUPS(GROUPS), .WAYS(WAYS)) dut (.sel(sel), .i_col(i_col), .i_mux(i_mux));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      foreach (i_col[c]) i_col[c] = I_W'($urandom);
      for (int s = 0; s < WAYS; s++) begin
        sel = 3'(s);
        #1;
        for (int g = 0; g < GROUPS; g++) begin
          checks++;
          if (i_mux[g] != i_col[g * WAYS + s]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
