// haar_lift: temporal Haar wavelet step on a pair of co-located coefficients, forward or
// inverse, purely combinational.
//
// Forward (integer lifting form of the Haar transform):  H = b - a,  L = a + (H >>> 1).
// Inverse:  a = L - (H >>> 1),  b = H + a.  The pair (a, b) is the same pixel in two
// consecutive frames; L goes to the low-frequency (L) frame, H to the high-frequency (H)
// frame. Because both directions recompute the same rounded term H >>> 1, the inverse is
// exact. Using the Haar wavelet in time follows the framework; the lifting form and the
// unnormalised scaling (L is the pair mean) are choices of this design.
module haar_lift
  import svc_pkg::*;
(
  input  logic  inverse,
  input  coef_t in_a,   // forward: frame 2p;     inverse: L coefficient
  input  coef_t in_b,   // forward: frame 2p + 1; inverse: H coefficient
  output coef_t out_a,  // forward: L;            inverse: frame 2p
  output coef_t out_b   // forward: H;            inverse: frame 2p + 1
);
  coef_t h, a;
  always_comb begin
    if (!inverse) begin
      h     = in_b - in_a;
      out_b = h;
      out_a = in_a + (h >>> 1);
      a     = '0;
    end else begin
      h     = in_b;
      a     = in_a - (h >>> 1);
      out_a = a;
      out_b = h + a;
    end
  end
endmodule
