// svc_pkg: types, constants and pure functions shared by the CS scalable video codec.
//
// Coefficients are signed fixed point, COEF_W bits with FRAC fractional bits. The
// adaptive measurement scheme table (range of K -> codebook index j -> number of
// measurements M) is the 16-entry table of the framework. The Bernoulli codebook is
// not stored: each +-1 entry of Phi_j is a fixed hash of (j, row, column), evaluated
// identically at encoder and decoder, so both sides hold the same "random" matrices
// without a 31-Mbit ROM (this replacement of a stored codebook is a choice of this design).
// MDIV is a test-only scaling knob: it divides both the K boundaries and the M values so
// that short vectors can be simulated with the same table shape; it is 1 in the design.
package svc_pkg;

  localparam int COEF_W = 32;
  localparam int FRAC   = 8;
  typedef logic signed [COEF_W-1:0] coef_t;

  localparam int NIDX = 16;
  // Upper K bound of index j (K <= bound selects j); index 15 is "600 < K".
  localparam int K_UPPER [NIDX] = '{0, 10, 20, 50, 100, 150, 200, 250,
                                    300, 350, 400, 450, 500, 550, 600, 32'h7fffffff};
  localparam int M_TABLE [NIDX] = '{0, 50, 130, 240, 370, 470, 650, 780,
                                    920, 1080, 1220, 1400, 1550, 1700, 1850, 2000};
  localparam int M_MAX = 2000;

  typedef enum logic [1:0] {SYM_BL = 2'd0, SYM_HDR = 2'd1, SYM_MEAS = 2'd2} sym_kind_e;

  // One symbol of the quantised stream between encoder and entropy coder.
  typedef struct packed {
    sym_kind_e   kind;   // base-layer coefficient, vector header, or measurement
    logic [3:0]  j;      // codebook index (header)
    logic [15:0] k;      // l0-norm of the vector (header)
    logic signed [COEF_W-1:0] data; // quantised value (BL / MEAS)
  } sym_t;

  // Codebook index for a given l0-norm.
  function automatic logic [3:0] index_of_k(input int unsigned k, input int unsigned mdiv);
    logic [3:0] j;
    j = 4'd15;
    for (int i = NIDX - 2; i >= 0; i--)
      if (k <= (K_UPPER[i] / mdiv)) j = 4'(i);
    return j;
  endfunction

  // Number of measurements of codebook entry j.
  function automatic int unsigned m_of_j(input logic [3:0] j, input int unsigned mdiv);
    return (M_TABLE[j] + mdiv - 1) / mdiv;
  endfunction

  // Entry Phi_j(r, c): 1 means -1, 0 means +1. A multiply/xor-shift hash of the indices.
  function automatic logic bern_neg(input logic [3:0] j, input logic [15:0] r,
                                    input logic [15:0] c);
    logic [31:0] h;
    h = ({16'd0, c} * 32'h9E3779B1) ^ ({16'd0, r} * 32'h85EBCA77) ^ ({28'd0, j} * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h[31];
  endfunction

endpackage
