// bernoulli_codebook: the codebook of 16 Bernoulli sensing matrices Phi_j, each entry +1
// or -1. Instead of storing the matrices (up to 2000 x 2160 bits each) the entry at
// (row, col) of matrix j is produced combinationally by a fixed integer hash of (j, row,
// col) (see svc_pkg::bern_neg). Encoder and decoder instantiate the same function, so they
// hold the same pseudo-random matrices, which is what the framework requires of its shared
// codebook; the hash generator itself is a choice of this design. LANES entries of one
// column, rows row .. row+LANES-1, are produced per call.
module bernoulli_codebook
  import svc_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  logic [3:0]       j,
  input  logic [15:0]      row,
  input  logic [15:0]      col,
  output logic [LANES-1:0] neg   // 1: entry is -1, 0: entry is +1
);
  always_comb
    for (int l = 0; l < LANES; l++) neg[l] = bern_neg(j, row + 16'(l), col);
endmodule
