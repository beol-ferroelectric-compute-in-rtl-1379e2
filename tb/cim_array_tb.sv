// cim_array_tb: self-checking test of the crossbar model.
// Writes every cell of the 32 x 256 array with a random bit through
// program pulses of PROG_CYCLES cycles, checks that a pulse one cycle too
// short writes nothing, then applies random read vectors on the word and bit
// lines and compares every column current with a reference computed from
// the testbench's own copy of the cell contents.
module cim_array_tb;
  import ising_pkg::*;
  localparam int ROWS = 32, COLS = 256, I_CELL = 130, PC = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  wl_drive_e wl [ROWS];
  bl_drive_e bl [COLS];
  logic [I_W-1:0] i_col [COLS];
  logic ref_bits [ROWS][COLS];
  int checks = 0, failures = 0;

  cim_array #(.ROWS(ROWS), .COLS(COLS), .I_CELL_NA(I_CELL), .PROG_CYCLES(PC)) dut (
    .clk(clk), .wl(wl), .bl(bl), .i_col(i_col));

  task automatic lines_off();
    foreach (wl[r]) wl[r] = WL_OFF;
    foreach (bl[c]) bl[c] = BL_OFF;
  endtask

  task automatic program_cell(int r, int c, logic b, int cycles);
    lines_off();
    wl[r] = b ? WL_PROG_P : WL_PROG_N;
    bl[c] = BL_PROG;
    repeat (cycles) @(posedge clk);
    #1 lines_off();
    @(posedge clk); #1;
  endtask

  task automatic check_read(logic [ROWS-1:0] x, logic [COLS-1:0] y);
    int cnt;
    foreach (wl[r]) wl[r] = x[r] ? WL_READ : WL_OFF;
    foreach (bl[c]) bl[c] = y[c] ? BL_READ : BL_OFF;
    #1;
    for (int c = 0; c < COLS; c++) begin
      cnt = 0;
      for (int r = 0; r < ROWS; r++) cnt += (x[r] && ref_bits[r][c]) ? 1 : 0;
      checks++;
      if (i_col[c] != (y[c] ? I_W'(cnt * I_CELL) : '0)) begin
        failures++;
        if (failures < 10) $display("col %0d: got %0d expected %0d", c, i_col[c], cnt * I_CELL);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ROWS-1:0] x;
    logic [COLS-1:0] y;
    lines_off();
    @(posedge clk); #1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        ref_bits[r][c] = 1'($urandom);
        program_cell(r, c, ref_bits[r][c], PC);
      end
    // all rows, all columns
    check_read('1, '1);
    // a pulse one cycle short of PROG_CYCLES must not write
    program_cell(3, 17, !ref_bits[3][17], PC - 1);
    program_cell(30, 200, !ref_bits[30][200], PC - 1);
    check_read('1, '1);
    // a full pulse flips them
    ref_bits[3][17] = !ref_bits[3][17];
    program_cell(3, 17, ref_bits[3][17], PC);
    check_read('1, '1);
    for (int t = 0; t < 40; t++) begin
      for (int w = 0; w < COLS; w += 32) y[w +: 32] = $urandom;
      x = $urandom;
      check_read(x, y);
    end
    check_read('0, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
