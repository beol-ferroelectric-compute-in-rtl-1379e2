// cim_array: behavioural model of the 32 x 256 FeFET BEOL crossbar.
//
// This is a behavioural model of an analog, process-specific macro, not
// synthesizable logic for a standard-cell flow. Each cell is an MFMIS FeFET
// whose threshold state stores one bit of J (low-VTH = 1, high-VTH = 0).
// Cells in a row share a word line (the gate, input x); cells in a column
// share a bit line (the drain, input y) and a source line, on which the
// column current is collected. A cell conducts, and adds one unit of cell
// current to its column, when its word line and bit line are both at read
// bias and it stores 1, so the column current is sum_r x_r * J[r][c] * y_c,
// the multiply-accumulate the paper measures as linear in the number of
// activated cells.
//
// Programming follows the paper: a +4 V / -4 V gate pulse of 1 us writes
// J = 1 / 0. The model writes a cell whose word line carries a program pulse
// and whose bit line is selected for programming once the pulse has lasted
// PROG_CYCLES clock cycles (100 cycles = 1 us at an assumed 100 MHz clock).
// Unselected bit lines are taken to inhibit programming; the paper does not
// describe the inhibit scheme.
//
// Interface: wl[r] and bl[c] are the driver levels; i_col[c] is the column
// current in nA, combinational in the line levels. I_CELL_NA, the current of
// one conducting cell, is an assumed value. Device variation and read or
// write disturb are not modelled.
module cim_array
  import ising_pkg::*;
#(
  parameter int unsigned ROWS        = 32,
  parameter int unsigned COLS        = 256,
  parameter int unsigned I_CELL_NA   = 130,
  parameter int unsigned PROG_CYCLES = 100
) (
  input  logic            clk,
  input  wl_drive_e       wl    [ROWS],
  input  bl_drive_e       bl    [COLS],
  output logic [I_W-1:0]  i_col [COLS]
);

  // Cell states, stored column by column: col_bits[c][r] is cell (r, c).
  logic [ROWS-1:0] col_bits [COLS];

  logic [ROWS-1:0] rd_rows;     // rows at read bias
  logic [ROWS-1:0] pg_rows;     // rows carrying a program pulse
  logic [ROWS-1:0] pg_val;      // value a pulse writes (+4 V writes 1)
  logic            pg_any;
  logic [$clog2(PROG_CYCLES+1)-1:0] pulse_cnt;
  logic            pg_fire;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      rd_rows[r] = (wl[r] == WL_READ);
      pg_rows[r] = (wl[r] == WL_PROG_P) || (wl[r] == WL_PROG_N);
      pg_val[r]  = (wl[r] == WL_PROG_P);
    end
    pg_any = |pg_rows;
  end

  // Pulse-width counter: a pulse writes when it reaches PROG_CYCLES cycles.
  assign pg_fire = pg_any && (pulse_cnt == ($bits(pulse_cnt))'(PROG_CYCLES - 1));

  always_ff @(posedge clk) begin
    if (!pg_any)
      pulse_cnt <= '0;
    else if (pulse_cnt != ($bits(pulse_cnt))'(PROG_CYCLES))
      pulse_cnt <= pulse_cnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (pg_fire) begin
      for (int c = 0; c < COLS; c++) begin
        if (bl[c] == BL_PROG)
          col_bits[c] <= (col_bits[c] & ~pg_rows) | (pg_val & pg_rows);
      end
    end
  end

  // Column currents: unit cell current times the number of conducting cells.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (bl[c] == BL_READ)
        i_col[c] = I_W'($countones(col_bits[c] & rd_rows) * I_CELL_NA);
      else
        i_col[c] = '0;
    end
  end

endmodule
