// wl_driver: word-line driver of the FeFET crossbar.
//
// In read mode every word line whose input bit x[r] is 1 is raised to the
// read gate bias and the others stay off, which applies the input vector X
// to the gates of the array. In program mode only row prog_row is driven,
// with a +4 V pulse to write J = 1 or a -4 V pulse to write J = 0 (the
// polarities and the 1 us width are the paper's; the pulse length is set by
// how long the controller holds program mode). Idle mode turns all lines off.
// Purely combinational; the output levels feed the array (and, in silicon,
// level shifters that make the actual voltages).
module wl_driver
  import ising_pkg::*;
#(
  parameter int unsigned ROWS = 32
) (
  input  drv_mode_e                  mode,
  input  logic [ROWS-1:0]            x,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic                       prog_bit,
  output wl_drive_e                  wl [ROWS]
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      unique case (mode)
        DRV_READ: wl[r] = x[r] ? WL_READ : WL_OFF;
        DRV_PROG: wl[r] = (r == int'(prog_row)) ? (prog_bit ? WL_PROG_P : WL_PROG_N) : WL_OFF;
        default:  wl[r] = WL_OFF;
      endcase
    end
  end

endmodule
