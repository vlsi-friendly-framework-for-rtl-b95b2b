// cs_decoder: the decoder of the compressed-sensing scalable video codec.
//
// start arms it for one GOF; it then consumes the symbol stream produced by the encoder
// (after entropy decoding) in the same layer order, using its own subband_scan to know
// where each value belongs:
//   SYM_BL   base-layer coefficient, dequantised (q << QSHIFT) into the GOF buffer;
//   SYM_HDR  start of an input vector: index j and l0-norm K. If M(j) = 0 the vector is
//            all zero and N zeros are written; otherwise
//   SYM_MEAS M measurements, dequantised into the EAMP engine, which reconstructs the N
//            coefficients; they are written back column-wise into their sub-band
//            ("sub-band formation").
// Layer scalability: `layers` (sampled at start) says how many enhancement layers the
// stream holds. The vectors of the missing finer layers (EL = LEVELS + 1 - level) take
// no symbols and are written as zeros, so a stream cut after the base layer or after
// any enhancement layer still decodes to a full-size, lower-detail picture.
// After the last vector the inverse 3-D DWT runs on the buffer and done pulses; the
// reconstructed frames can then be read through rd_addr -> rd_pix (combinational;
// rounded and clipped to 0..255). A symbol of an unexpected kind sets the sticky
// proto_err and is dropped. The order of operations (entropy decoding, EAMP from y, j and
// K, sub-band formation, inverse 3-D DWT) follows the framework; the stream format,
// error flag and read port are choices of this design.
module cs_decoder
  import svc_pkg::*;
#(
  parameter int unsigned W      = 1920,
  parameter int unsigned H      = 1080,
  parameter int unsigned GOF    = 8,
  parameter int unsigned LEVELS = 3,
  parameter int unsigned NVEC   = 2160,
  parameter int unsigned MDIV   = 1,
  parameter int unsigned ITER   = 400,
  parameter int unsigned QSHIFT = 8,
  localparam int unsigned AW    = $clog2(GOF * W * H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [3:0]    layers,   // enhancement layers received (LEVELS = all), sampled at start
  output logic          busy,
  output logic          done,
  input  logic          sym_valid,
  output logic          sym_ready,
  input  sym_t          sym,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_pix,
  output logic          proto_err
);
  localparam int unsigned NW = $clog2(NVEC + 1);
  typedef enum logic [2:0] {D_IDLE, D_BL, D_HDR, D_ZERO, D_LOADY, D_EAMP, D_WRS, D_IDWT} st_e;
  st_e st;

  // GOF buffer and inverse 3-D DWT.
  logic          d_start, d_busy, d_done, d_we;
  logic [AW-1:0] d_addr;
  coef_t         d_wdata, d_rdata;
  dwt3d #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS)) u_idwt (
    .clk, .rst_n, .start(d_start), .inverse(1'b1), .busy(d_busy), .done(d_done),
    .ext_we(d_we), .ext_addr(d_addr), .ext_wdata(d_wdata), .ext_rdata(d_rdata)
  );

  logic [3:0]    sc_level;
  logic          sc_start, sc_adv, sc_valid, sc_done, sc_bl, sc_first, sc_last;
  logic [AW-1:0] sc_addr;
  subband_scan #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(NVEC)) u_scan (
    .clk, .rst_n, .start(sc_start), .adv(sc_adv), .valid(sc_valid), .done(sc_done),
    .addr(sc_addr), .is_bl(sc_bl), .vec_first(sc_first), .vec_last(sc_last),
    .level(sc_level)
  );

  // A vector of level l belongs to enhancement layer LEVELS + 1 - l; it is received only
  // when that layer number is at most the number of layers received.
  logic [3:0] lay_q;
  logic       rcv;
  assign rcv = (5'(sc_level) + 5'(lay_q)) >= 5'(LEVELS + 1);

  // EAMP reconstruction.
  logic          e_ywe, e_start, e_busy, e_done, e_iht;
  logic [11:0]   e_yidx;
  logic [NW-1:0] e_sidx;
  coef_t         e_sdata, deq;
  logic [3:0]    jq;
  logic [15:0]   kq;
  logic [11:0]   m, yc;
  eamp #(.NVEC(NVEC), .MDIV(MDIV), .ITER(ITER)) u_eamp (
    .clk, .rst_n, .y_we(e_ywe), .y_idx(e_yidx), .y_data(deq), .start(e_start),
    .j(jq), .k(kq), .busy(e_busy), .done(e_done), .iht_phase(e_iht),
    .s_idx(e_sidx), .s_data(e_sdata)
  );
  assign m = 12'(m_of_j(jq, MDIV));

  assign deq = sym.data <<< QSHIFT;

  logic bl_ok, meas_ok;
  assign bl_ok   = (st == D_BL) && sc_valid && sc_bl && sym_valid && sym.kind == SYM_BL;
  assign meas_ok = (st == D_LOADY) && sym_valid && sym.kind == SYM_MEAS;
  assign sym_ready = ((st == D_BL) && sc_valid && sc_bl) || (st == D_HDR && rcv) || (st == D_LOADY);

  assign e_ywe   = meas_ok;
  assign e_yidx  = yc;
  assign e_start = (st == D_EAMP) && !e_busy && !e_done && (yc == m);

  logic [NW-1:0] wc;   // position in the vector being written
  logic          sc_fin, idwt_go;
  assign e_sidx = wc;

  always_comb begin
    d_we    = 1'b0;
    d_wdata = '0;
    d_addr  = (st == D_IDLE) ? rd_addr : sc_addr;
    sc_adv  = 1'b0;
    if (bl_ok) begin
      d_we = 1'b1; d_wdata = deq; sc_adv = 1'b1;
    end else if (st == D_ZERO && sc_valid) begin
      d_we = 1'b1; d_wdata = '0; sc_adv = 1'b1;
    end else if (st == D_WRS && sc_valid) begin
      d_we = 1'b1; d_wdata = e_sdata; sc_adv = 1'b1;
    end
  end

  // Reconstructed pixel: round the Q(FRAC) value and clip to 8 bits.
  always_comb begin
    coef_t v;
    v = (d_rdata + coef_t'(1 << (FRAC - 1))) >>> FRAC;
    if (v < 0)        rd_pix = 8'd0;
    else if (v > 255) rd_pix = 8'd255;
    else              rd_pix = v[7:0];
  end

  assign d_start  = (st == D_IDWT) && !d_busy && !d_done && !sc_valid && sc_fin;
  assign sc_start = (st == D_IDLE) && start;
  assign busy     = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; done <= 1'b0; proto_err <= 1'b0; lay_q <= '0; jq <= '0; kq <= '0; yc <= '0;
      wc <= '0; sc_fin <= 1'b0; idwt_go <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sc_done) sc_fin <= 1'b1;
      unique case (st)
        D_IDLE: if (start) begin st <= D_BL; lay_q <= layers; sc_fin <= 1'b0; idwt_go <= 1'b0; end
        D_BL: begin
          if (sc_valid && sc_bl && sym_valid && sym.kind != SYM_BL) proto_err <= 1'b1;
          if (sc_valid && !sc_bl) st <= D_HDR;
        end
        D_HDR: if (!rcv) begin
          jq <= '0; kq <= '0; wc <= '0; st <= D_ZERO;     // layer not received: zero-fill
        end else if (sym_valid) begin
          if (sym.kind != SYM_HDR) proto_err <= 1'b1;
          else begin
            jq <= sym.j; kq <= sym.k; yc <= '0; wc <= '0;
            st <= (m_of_j(sym.j, MDIV) == 0) ? D_ZERO : D_LOADY;
          end
        end
        D_LOADY: if (sym_valid) begin
          if (sym.kind != SYM_MEAS) proto_err <= 1'b1;
          else begin
            yc <= yc + 12'd1;
            if (yc + 12'd1 == m) st <= D_EAMP;
          end
        end
        D_EAMP: if (e_done) begin wc <= '0; st <= D_WRS; end
        D_ZERO, D_WRS: if (sc_valid) begin
          wc <= wc + NW'(1);
          if (sc_last) st <= D_IDWT;
        end
        D_IDWT: begin
          // Either the next vector starts, or the scan has finished and the inverse runs.
          if (!idwt_go && sc_valid) st <= D_HDR;
          else if (d_start) idwt_go <= 1'b1;
          else if (idwt_go && d_done) begin st <= D_IDLE; done <= 1'b1; end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_eamp_once: assert property (@(posedge clk) disable iff (!rst_n) e_start |=> e_busy);
endmodule
