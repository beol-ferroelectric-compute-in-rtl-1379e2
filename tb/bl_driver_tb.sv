// bl_driver_tb: checks the bit-line levels in idle, read and program mode
// against the expected level of every line for random inputs.
module bl_driver_tb;
  import ising_pkg::*;
  localparam int COLS = 256;
  drv_mode_e mode;
  logic [COLS-1:0] y;
  logic [7:0] prog_col;
  bl_drive_e bl [COLS];
  int checks = 0, failures = 0;

  bl_driver #(.COLS(COLS)) dut (.mode(mode), .y(y), .prog_col(prog_col), .bl(bl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bl_drive_e e;
    for (int t = 0; t < 120; t++) begin
      mode = drv_mode_e'(t % 3);
      for (int w = 0; w < COLS; w += 32) y[w +: 32] = $urandom;
      prog_col = 8'($urandom);
      #1;
      for (int c = 0; c < COLS; c++) begin
        if (mode == DRV_READ) e = y[c] ? BL_READ : BL_OFF;
        else if (mode == DRV_PROG && c == prog_col) e = BL_PROG;
        else e = BL_OFF;
        checks++;
        if (bl[c] != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
