// wl_driver_tb: checks the word-line levels in idle, read and program mode
// against the expected level of every line for random inputs.
module wl_driver_tb;
  import ising_pkg::*;
  localparam int ROWS = 32;
  drv_mode_e mode;
  logic [ROWS-1:0] x;
  logic [4:0] prog_row;
  logic prog_bit;
  wl_drive_e wl [ROWS];
  int checks = 0, failures = 0;

  wl_driver #(.ROWS(ROWS)) dut (.mode(mode), .x(x), .prog_row(prog_row), .prog_bit(prog_bit), .wl(wl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl_drive_e e;
    for (int t = 0; t < 300; t++) begin
      mode = drv_mode_e'(t % 3);
      x = $urandom; prog_row = 5'($urandom); prog_bit = 1'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        if (mode == DRV_READ) e = x[r] ? WL_READ : WL_OFF;
        else if (mode == DRV_PROG && r == prog_row) e = prog_bit ? WL_PROG_P : WL_PROG_N;
        else e = WL_OFF;
        checks++;
        if (wl[r] != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
