// cs_measure: compressed-sensing measurement of one input vector, y = Phi_j * s, with
// additions and subtractions only (Phi_j is a +-1 Bernoulli matrix).
//
// Collect phase: the N thresholded coefficients of a vector arrive one per clock
// (in_valid/in_ready, in_last on the N-th); the non-zero ones are stored as
// (column, value) pairs, and at in_last the l0-norm K from l0_threshold is latched. K
// selects j and M (index_finder). Output phase: first a header beat (out_hdr = 1,
// carrying j and K), then the M measurements y_0 .. y_{M-1} in order, each
// y_r = sum over stored pairs of (+-value) with the sign Phi_j(r, column) from
// bernoulli_codebook. Each measurement takes max(K,1) accumulate clocks plus one output
// beat (held until out_ready). K = 0 gives M = 0: only the header is sent.
// Because zero coefficients contribute nothing, only the K survivors are visited
// (M*K rather than M*N additions); that sparse schedule, the single accumulator and the
// 32-bit wrap-around sums are choices of this design. The measurement itself, the choice
// of Phi_j by the index of K, and sending j and K with the measurements follow the
// framework.
module cs_measure
  import svc_pkg::*;
#(
  parameter int unsigned NVEC = 2160,
  parameter int unsigned MDIV = 1,
  localparam int unsigned NW  = $clog2(NVEC + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  coef_t         in_data,
  input  logic          in_nz,
  input  logic          in_last,
  input  logic [NW-1:0] in_k,
  output logic          out_valid,
  input  logic          out_ready,
  output logic          out_hdr,
  output logic [3:0]    out_j,
  output logic [15:0]   out_k,
  output coef_t         out_y
);
  typedef enum logic [1:0] {S_COLLECT, S_HDR, S_ACC, S_OUT} st_e;
  st_e st;

  coef_t         nz_val [NVEC];
  logic [15:0]   nz_col [NVEC];
  logic [NW-1:0] ncol, nnz, e;
  logic [NW-1:0] k_q;
  logic [3:0]    j;
  logic [11:0]   m;
  logic [11:0]   row;
  coef_t         acc;
  logic          neg;

  index_finder #(.MDIV(MDIV), .KW(NW)) u_idx (.k(k_q), .j, .m);
  bernoulli_codebook #(.LANES(1)) u_cb (.j, .row(16'(row)), .col(nz_col[e]), .neg);

  assign in_ready  = (st == S_COLLECT);
  assign out_valid = (st == S_HDR) || (st == S_OUT);
  assign out_hdr   = (st == S_HDR);
  assign out_j     = j;
  assign out_k     = 16'(k_q);
  assign out_y     = acc;

  always_ff @(posedge clk) begin
    if (st == S_COLLECT && in_valid && in_nz) begin
      nz_val[nnz] <= in_data;
      nz_col[nnz] <= 16'(ncol);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_COLLECT; ncol <= '0; nnz <= '0; e <= '0; k_q <= '0; row <= '0; acc <= '0;
    end else begin
      unique case (st)
        S_COLLECT: if (in_valid) begin
          ncol <= ncol + NW'(1);
          if (in_nz) nnz <= nnz + NW'(1);
          if (in_last) begin
            k_q <= in_k;
            st  <= S_HDR;
          end
        end
        S_HDR: if (out_ready) begin
          row <= '0; e <= '0; acc <= '0;
          st  <= (m == '0) ? S_COLLECT : (nnz == '0 ? S_OUT : S_ACC);
          if (m == '0) begin ncol <= '0; nnz <= '0; end
        end
        S_ACC: begin
          acc <= neg ? acc - nz_val[e] : acc + nz_val[e];
          if (e == nnz - NW'(1)) st <= S_OUT;
          else e <= e + NW'(1);
        end
        S_OUT: if (out_ready) begin
          acc <= '0; e <= '0;
          if (row == m - 12'd1) begin
            st <= S_COLLECT; ncol <= '0; nnz <= '0;
          end else begin
            row <= row + 12'd1;
            st  <= (nnz == '0) ? S_OUT : S_ACC;
          end
        end
        default: st <= S_COLLECT;
      endcase
    end
  end

  // The l0-norm handed over must equal the number of stored non-zeros.
  a_k_match: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_HDR) |-> (k_q == nnz));
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_y) && $stable(out_hdr)));
endmodule
