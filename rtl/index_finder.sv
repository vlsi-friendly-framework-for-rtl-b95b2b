// index_finder: maps the l0-norm K of an input vector to the codebook index j and the
// number of measurements M of that codebook entry, purely combinationally.
// The 16 ranges of K and their M values are the framework's table (K = 0 -> j = 0, M = 0;
// 0 < K <= 10 -> j = 1, M = 50; ...; 600 < K -> j = 15, M = 2000). MDIV = 1 in the
// design; a larger MDIV divides both the K boundaries and M (for short test vectors).
module index_finder
  import svc_pkg::*;
#(
  parameter int unsigned MDIV = 1,
  parameter int unsigned KW   = 16
) (
  input  logic [KW-1:0] k,
  output logic [3:0]    j,
  output logic [11:0]   m
);
  always_comb begin
    j = index_of_k(int'(k), MDIV);
    m = 12'(m_of_j(j, MDIV));
  end
endmodule
