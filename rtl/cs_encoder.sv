// cs_encoder: the encoder of the compressed-sensing scalable video codec.
//
// Operation on one group of frames (GOF):
//   1. While idle, pixels are written into the GOF buffer (pix_we/pix_addr/pix_data,
//      address = frame*W*H + row*W + column; stored as pixel << FRAC).
//   2. start runs the forward 3-D DWT (dwt3d) in place.
//   3. subband_scan walks the base layer: each LLL coefficient is quantised and sent as
//      a SYM_BL symbol, without compressed sensing.
//   4. It then walks the high-frequency sub-bands (levels 3, 2, 1) in vectors of N.
//      Each coefficient passes l0_threshold (hard threshold thr, count K) into
//      cs_measure, which sends a SYM_HDR symbol with j and K, then the M measurements
//      of y = Phi_j s, each quantised and sent as SYM_MEAS.
//   5. done pulses when the last vector has been sent.
// Symbols leave on a valid/ready stream meant for an entropy coder; a symbol is held
// until accepted. thr is the threshold T in the coefficient format (1.0 = 1 << FRAC)
// and may change between GOFs. The flow (3-D DWT, base layer without CS, threshold and
// l0-norm, index, codebook, measurement, quantisation; layer order BL, EL1, EL2, EL3)
// follows the framework; the buffer interface, the symbol format and the serial
// one-coefficient-per-clock dataflow are choices of this design.
module cs_encoder
  import svc_pkg::*;
#(
  parameter int unsigned W      = 1920,
  parameter int unsigned H      = 1080,
  parameter int unsigned GOF    = 8,
  parameter int unsigned LEVELS = 3,
  parameter int unsigned NVEC   = 2160,
  parameter int unsigned MDIV   = 1,
  parameter int unsigned QSHIFT = 8,
  parameter int unsigned QBITS  = 16,
  localparam int unsigned AW    = $clog2(GOF * W * H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pix_we,
  input  logic [AW-1:0] pix_addr,
  input  logic [7:0]    pix_data,
  input  coef_t         thr,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          sym_valid,
  input  logic          sym_ready,
  output sym_t          sym
);
  localparam int unsigned NW = $clog2(NVEC + 1);
  typedef enum logic [1:0] {E_IDLE, E_DWT, E_SCAN, E_FLUSH} st_e;
  st_e st;

  // GOF buffer and 3-D DWT.
  logic          d_start, d_busy, d_done, d_we;
  logic [AW-1:0] d_addr;
  coef_t         d_wdata, d_rdata;
  dwt3d #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS)) u_dwt (
    .clk, .rst_n, .start(d_start), .inverse(1'b0), .busy(d_busy), .done(d_done),
    .ext_we(d_we), .ext_addr(d_addr), .ext_wdata(d_wdata), .ext_rdata(d_rdata)
  );

  // Scan of base layer and input vectors.
  logic          sc_start, sc_adv, sc_valid, sc_done, sc_bl, sc_first, sc_last;
  logic [AW-1:0] sc_addr;
  logic [3:0] sc_level;   // not needed by the encoder
  subband_scan #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(NVEC)) u_scan (
    .clk, .rst_n, .start(sc_start), .adv(sc_adv), .valid(sc_valid), .done(sc_done),
    .addr(sc_addr), .is_bl(sc_bl), .vec_first(sc_first), .vec_last(sc_last),
    .level(sc_level)
  );

  // Threshold and l0-norm.
  coef_t         th_data;
  logic          th_nz;
  logic [NW-1:0] th_k;
  logic          cm_in_valid, cm_in_ready;
  l0_threshold #(.NVEC(NVEC)) u_thr (
    .clk, .rst_n, .thr, .in_valid(cm_in_valid), .in_first(sc_first), .in_data(d_rdata),
    .out_data(th_data), .nz(th_nz), .k_out(th_k)
  );

  // Measurement.
  logic        cm_out_valid, cm_out_hdr;
  logic [3:0]  cm_j;
  logic [15:0] cm_k;
  coef_t       cm_y;
  cs_measure #(.NVEC(NVEC), .MDIV(MDIV)) u_cs (
    .clk, .rst_n, .in_valid(cm_in_valid), .in_ready(cm_in_ready), .in_data(th_data),
    .in_nz(th_nz), .in_last(sc_last), .in_k(th_k),
    .out_valid(cm_out_valid), .out_ready(sym_ready), .out_hdr(cm_out_hdr),
    .out_j(cm_j), .out_k(cm_k), .out_y(cm_y)
  );

  // Quantiser, shared by base layer and measurements.
  coef_t q_in, q_out;
  logic  q_sat;
  quantizer #(.QSHIFT(QSHIFT), .QBITS(QBITS)) u_q (.x(q_in), .q(q_out), .sat(q_sat));

  logic scanning;
  assign scanning    = (st == E_SCAN) && sc_valid;
  assign cm_in_valid = scanning && !sc_bl && cm_in_ready;
  assign q_in        = cm_out_valid ? cm_y : d_rdata;

  always_comb begin
    sym       = '0;
    sym_valid = 1'b0;
    if (cm_out_valid) begin
      sym_valid = 1'b1;
      sym.kind  = cm_out_hdr ? SYM_HDR : SYM_MEAS;
      sym.j     = cm_j;
      sym.k     = cm_k;
      sym.data  = cm_out_hdr ? '0 : q_out;
    end else if (scanning && sc_bl) begin
      sym_valid = 1'b1;
      sym.kind  = SYM_BL;
      sym.data  = q_out;
    end
  end

  assign sc_adv   = scanning && (sc_bl ? (sym_ready && !cm_out_valid) : cm_in_ready);
  assign d_we     = (st == E_IDLE) && pix_we;
  assign d_addr   = (st == E_IDLE) ? pix_addr : sc_addr;
  assign d_wdata  = coef_t'({pix_data, FRAC'(0)});
  assign d_start  = (st == E_IDLE) && start;
  assign sc_start = (st == E_DWT) && d_done;
  assign busy     = (st != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= E_IDLE;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        E_IDLE:  if (start) st <= E_DWT;
        E_DWT:   if (d_done) st <= E_SCAN;
        E_SCAN:  if (sc_done) st <= E_FLUSH;
        E_FLUSH: if (cm_in_ready && !cm_out_valid) begin st <= E_IDLE; done <= 1'b1; end
        default: st <= E_IDLE;
      endcase
    end
  end

  a_sym_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (sym_valid && !sym_ready) |=> (sym_valid && $stable(sym)));
endmodule
