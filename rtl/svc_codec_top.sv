// svc_codec_top: encoder and decoder of the compressed-sensing scalable video codec, side
// by side. The entropy coder and decoder (Golomb-Rice / adjusted binary coding with a
// context model and run-length coding in the framework) are not part of this RTL: the
// encoder's quantised symbol stream leaves on enc_sym_* and the decoder takes its symbol
// stream on dec_sym_*. A lossless channel is simply enc_sym_* wired to dec_sym_*.
// dec_layers tells the decoder how many enhancement layers the stream it gets holds
// (LEVELS for all of them); a channel that drops the finer layers sets it lower.
// Each side works on one group of frames at a time (see cs_encoder and cs_decoder for
// the interface timing). Parameter defaults are the framework's main configuration:
// full-HD frames, GOF of 8, three levels of 3-D DWT, input vectors of N = 2160, the
// 16-entry codebook table and 400 EAMP iterations.
module svc_codec_top
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
  parameter int unsigned QBITS  = 16,
  localparam int unsigned AW    = $clog2(GOF * W * H)
) (
  input  logic          clk,
  input  logic          rst_n,
  // encoder side
  input  logic          pix_we,
  input  logic [AW-1:0] pix_addr,
  input  logic [7:0]    pix_data,
  input  coef_t         thr,
  input  logic          enc_start,
  output logic          enc_busy,
  output logic          enc_done,
  output logic          enc_sym_valid,
  input  logic          enc_sym_ready,
  output sym_t          enc_sym,
  // decoder side
  input  logic          dec_start,
  input  logic [3:0]    dec_layers,
  output logic          dec_busy,
  output logic          dec_done,
  input  logic          dec_sym_valid,
  output logic          dec_sym_ready,
  input  sym_t          dec_sym,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_pix,
  output logic          dec_proto_err
);
  cs_encoder #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(NVEC), .MDIV(MDIV),
               .QSHIFT(QSHIFT), .QBITS(QBITS)) u_enc (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .thr, .start(enc_start),
    .busy(enc_busy), .done(enc_done), .sym_valid(enc_sym_valid), .sym_ready(enc_sym_ready),
    .sym(enc_sym)
  );
  cs_decoder #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(NVEC), .MDIV(MDIV),
               .ITER(ITER), .QSHIFT(QSHIFT)) u_dec (
    .clk, .rst_n, .start(dec_start), .layers(dec_layers), .busy(dec_busy), .done(dec_done),
    .sym_valid(dec_sym_valid), .sym_ready(dec_sym_ready), .sym(dec_sym),
    .rd_addr, .rd_pix, .proto_err(dec_proto_err)
  );
endmodule
