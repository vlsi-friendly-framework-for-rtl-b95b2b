// l0_threshold: hard thresholding and l0-norm of one CS input vector.
//
// Each accepted coefficient (in_valid) is passed on combinationally as 0 when its
// magnitude is below the threshold T, unchanged otherwise; `nz` marks the survivors.
// A counter accumulates the number of survivors of the current vector: it restarts at
// in_first, and k_out gives the count including the current coefficient, so at in_last it
// is the l0-norm K of the whole vector. Thresholding at T and counting the non-zeros
// follows the framework; comparing the magnitude against T in the coefficients' own
// fixed-point format (T = 1.0 is 1 << FRAC) is a choice of this design.
module l0_threshold
  import svc_pkg::*;
#(
  parameter int unsigned NVEC = 2160,
  localparam int unsigned NW  = $clog2(NVEC + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  coef_t         thr,       // T in the coefficient format
  input  logic          in_valid,
  input  logic          in_first,
  input  coef_t         in_data,
  output coef_t         out_data,
  output logic          nz,
  output logic [NW-1:0] k_out
);
  coef_t         mag;
  logic [NW-1:0] cnt;
  always_comb begin
    mag      = in_data[COEF_W-1] ? -in_data : in_data;
    nz       = !(mag < thr);
    out_data = nz ? in_data : '0;
    k_out    = (in_first ? '0 : cnt) + NW'(nz);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cnt <= '0;
    else if (in_valid) cnt <= k_out;
  end
endmodule
