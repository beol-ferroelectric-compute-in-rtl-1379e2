// input_encoder: forms the word-line and bit-line input vectors of one
// CiM read phase.
//
// VMV (vector-matrix-vector, E = X^T J Y, inputs 1/0): the word lines get
// q and every column of element k gets v[k], so the array computes
// q^T K v. For the attention-inspired initialization q = Q_i and v = V_i
// (the score S_i = Q_i^T K V_i, with Q_i indexing the rows of K as in the
// paper's equation).
// VMM (vector-matrix, E = J X, Y all ones) with ternary X: the paper splits
// the product into two physical phases. Phase 0 drives the word lines of
// the entries with X = +1, phase 1 those with X = -1 (again as positive
// inputs); the output stage subtracts the second result from the first.
// Entries with X = 0 are driven in neither phase. Combinational.
module input_encoder
  import ising_pkg::*;
#(
  parameter int unsigned N = N_SPINS
) (
  input  cim_op_e               op,
  input  logic                  phase,
  input  trit_t                 xt [N],
  input  logic [N-1:0]          q,
  input  logic [N-1:0]          v,
  output logic [N-1:0]          wl_x,
  output logic [N*M_BITS-1:0]   bl_y
);

  always_comb begin
    for (int j = 0; j < N; j++) begin
      if (op == OP_VMV)
        wl_x[j] = q[j];
      else
        wl_x[j] = phase ? (xt[j] == T_NEG) : (xt[j] == T_POS);
    end
    for (int c = 0; c < N * M_BITS; c++)
      bl_y[c] = (op == OP_VMV) ? v[c / M_BITS] : 1'b1;
  end

endmodule
