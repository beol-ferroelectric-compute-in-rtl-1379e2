// bl_driver: bit-line (drain) driver of the FeFET crossbar.
//
// In read mode every bit line whose input bit y[c] is 1 is put at the read
// drain bias, which applies the second input vector Y of a vector-matrix-
// vector product (Y is all ones for a vector-matrix product). In program
// mode only column prog_col is selected for writing, the other columns
// inhibit; this per-cell selection is this design's choice, based on the
// paper's statement that every single cell can be selected through the
// decoders. Idle mode turns all lines off. Purely combinational.
module bl_driver
  import ising_pkg::*;
#(
  parameter int unsigned COLS = 256
) (
  input  drv_mode_e                  mode,
  input  logic [COLS-1:0]            y,
  input  logic [$clog2(COLS)-1:0]    prog_col,
  output bl_drive_e                  bl [COLS]
);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      unique case (mode)
        DRV_READ: bl[c] = y[c] ? BL_READ : BL_OFF;
        DRV_PROG: bl[c] = (c == int'(prog_col)) ? BL_PROG : BL_OFF;
        default:  bl[c] = BL_OFF;
      endcase
    end
  end

endmodule
