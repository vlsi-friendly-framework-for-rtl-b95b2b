// quantizer: uniform quantiser for CS measurements and base-layer coefficients.
// q = saturate(round(x / 2^QSHIFT)) to a signed QBITS-bit integer, rounding halves
// upward; the dequantiser at the decoder is q << QSHIFT. Combinational.
// That measurements and the base layer are quantised before entropy coding follows the
// framework, whose results show that more than 10 bits per measurement leave the quality
// unchanged; the step size (one integer unit with QSHIFT = FRAC), the 16-bit range and
// saturation are choices of this design.
module quantizer
  import svc_pkg::*;
#(
  parameter int unsigned QSHIFT = 8,
  parameter int unsigned QBITS  = 16
) (
  input  coef_t x,
  output coef_t q,
  output logic  sat     // the value was clipped
);
  localparam longint QMAX = (longint'(1) <<< (QBITS - 1)) - 1;
  localparam longint QMIN = -(longint'(1) <<< (QBITS - 1));
  always_comb begin
    logic signed [COEF_W:0] r;
    r = ((COEF_W+1)'(x) + (COEF_W+1)'(QSHIFT == 0 ? 0 : (1 << (QSHIFT - 1)))) >>> QSHIFT;
    sat = 1'b0;
    if (longint'(r) > QMAX)      begin q = coef_t'(QMAX); sat = 1'b1; end
    else if (longint'(r) < QMIN) begin q = coef_t'(QMIN); sat = 1'b1; end
    else                         q = coef_t'(r);
  end
endmodule
