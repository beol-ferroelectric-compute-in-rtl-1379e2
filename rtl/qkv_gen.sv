// qkv_gen: query and value vectors of the attention-inspired initialization.
//
// The key matrix K is the coupling matrix J itself and lives in the
// crossbar. This block keeps a 1-bit copy of K's connection pattern,
// conn[j][i] = (K[j,i] != 0), written alongside each J element, and derives
// for spin idx the column vectors
//   Q_i[j] = 1 where K[j,i] == 0 (spins not connected, as in the paper),
//   V_i[k] = 1 where K[k,i] != 0 (the neighbours of spin i).
// The paper defines V_i = K[:,i]; since VMV inputs are 1/0 this design
// applies its connection pattern. Writes are registered; q and v are
// combinational in idx.
module qkv_gen #(
  parameter int unsigned N = 32
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [$clog2(N)-1:0]  wr_row,
  input  logic [$clog2(N)-1:0]  wr_col,
  input  logic                  wr_conn,
  input  logic [$clog2(N)-1:0]  idx,
  output logic [N-1:0]          q,
  output logic [N-1:0]          v
);

  // conn[c][r] = connection bit of K[r, c]; column-major so a read is one word.
  logic [N-1:0] conn [N];

  always_ff @(posedge clk) begin
    if (we) conn[wr_col][wr_row] <= wr_conn;
  end

  assign v = conn[idx];
  assign q = ~conn[idx];

endmodule
