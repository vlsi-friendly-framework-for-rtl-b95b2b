// tb_svc_codec_top: end-to-end run of the codec on synthetic video. A smooth moving
// pattern with a bright moving square is coded for three GOFs (threshold T = 1.0, then
// T = 1.6, then T = 1.0 again); the encoder's symbols pass through a channel with random
// stalls straight into the decoder (a lossless stand-in for the entropy coder/decoder
// pair). In the third GOF the channel drops enhancement layers 2 and 3 and the decoder is
// told it gets one enhancement layer (layer scalability).
// Checked against reference models: every encoder symbol (base layer, vector header with
// j and K, quantised measurements), and every reconstructed pixel (reference EAMP and
// inverse 3-D DWT). Counted mechanisms, each of which must occur: base-layer symbols,
// all-zero vectors (j = 0), CS-coded vectors, several different codebook indices,
// the AMP-to-IHT switch inside EAMP, both threshold settings, channel back-pressure and
// a decode with dropped layers.
module tb_svc_codec_top;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int W = 64, H = 32, GOF = 8, LEVELS = 3, N = 32, MDIV = 80, ITER = 20;
  localparam int QS = 8, QB = 16;
  localparam int DEPTH = W * H * GOF;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_we = 0, enc_start = 0, enc_busy, enc_done, enc_sym_valid, enc_sym_ready;
  logic [AW-1:0] pix_addr = '0, rd_addr = '0;
  logic [7:0] pix_data = '0, rd_pix;
  coef_t thr = 32'sd256;
  sym_t enc_sym, dec_sym;
  logic [3:0] dec_layers = 4'(LEVELS);
  logic dec_start = 0, dec_busy, dec_done, dec_sym_valid, dec_sym_ready, dec_proto_err;
  logic stall = 0;

  svc_codec_top #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(N), .MDIV(MDIV),
                  .ITER(ITER), .QSHIFT(QS), .QBITS(QB)) dut (.*);

  // Channel with random stalls.
  assign dec_sym       = enc_sym;
  // From symbol cut_idx on, the channel drops the finer layers: the encoder's symbols are
  // drained and never reach the decoder.
  int   cut_idx = 1 << 30;
  logic cut;
  assign cut           = (sidx >= cut_idx);
  assign dec_sym_valid = enc_sym_valid && !stall && !cut;
  assign enc_sym_ready = cut ? 1'b1 : (dec_sym_ready && !stall);
  always @(negedge clk) stall <= ($urandom_range(0, 7) == 0);

  int checks = 0, failures = 0;
  int n_cut = 0, n_bl = 0, n_zero = 0, n_cs = 0, n_switch = 0, n_stall = 0, n_t16 = 0, n_t10 = 0;
  int jhist [16];

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // AMP -> IHT switches inside the decoder's EAMP.
  logic iht_q = 0;
  always @(posedge clk) begin
    iht_q <= dut.u_dec.u_eamp.iht_phase;
    if (dut.u_dec.u_eamp.iht_phase && !iht_q) n_switch++;
    if (enc_sym_valid && stall) n_stall++;
  end

  // Expected symbol stream, built by the reference encoder.
  sym_t exp_syms [$];
  int   sidx = 0;
  always @(posedge clk) begin
    if (enc_sym_valid && enc_sym_ready) begin
      checks++;
      if (sidx >= exp_syms.size() || enc_sym != exp_syms[sidx]) begin
        failures++;
        if (failures < 10)
          $display("symbol %0d: kind %0d j %0d k %0d data %0d", sidx, enc_sym.kind,
                   enc_sym.j, enc_sym.k, enc_sym.data);
      end
      sidx++;
    end
  end

  // Stream as a decoder that received only `lay` enhancement layers sees it: the vectors
  // of the dropped (finest) levels become all-zero vectors. Returns where the cut is.
  function automatic int truncate(input sym_t s [$], input int lay, ref sym_t o [$]);
    int ndrop, nhdr, h, cidx;
    ndrop = 0;
    for (int l = 1; l <= LEVELS - lay; l++)
      ndrop += ((GOF >> l) * 7) * ((W >> l) * (H >> l) / N);
    nhdr = 0;
    foreach (s[i]) if (s[i].kind == SYM_HDR) nhdr++;
    o.delete();
    h = 0; cidx = 1 << 30;
    foreach (s[i]) begin
      if (s[i].kind == SYM_HDR) h++;
      if (h > nhdr - ndrop) begin
        if (cidx == (1 << 30)) cidx = i;
        if (s[i].kind == SYM_HDR) o.push_back('{kind: SYM_HDR, j: 4'd0, k: 16'd0, data: '0});
      end else o.push_back(s[i]);
    end
    return cidx;
  endfunction

  task automatic gof(input int g, input longint t, input int lay);
    longint pix [], dm [];
    sym_t rx [$];
    int cyc, cidx;
    real mse;
    video_ref(pix, W, H, GOF, g);
    encode_ref(pix, W, H, GOF, LEVELS, N, MDIV, t, QS, QB, exp_syms);
    cidx = truncate(exp_syms, lay, rx);
    decode_ref(rx, W, H, GOF, LEVELS, N, MDIV, ITER, QS, dm);
    sidx = 0;
    cut_idx = cidx;
    dec_layers = 4'(lay);
    if (lay < LEVELS) n_cut++;
    foreach (exp_syms[i])
      if (exp_syms[i].kind == SYM_HDR) begin
        jhist[exp_syms[i].j]++;
        if (exp_syms[i].j == 0) n_zero++; else n_cs++;
      end
    // Run the design.
    thr = coef_t'(t);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = AW'(a); pix_data = 8'(pix[a]);
    end
    @(negedge clk);
    pix_we = 0; dec_start = 1; enc_start = 1;
    @(negedge clk);
    dec_start = 0; enc_start = 0; cyc = 0;
    while (!dec_done) begin @(negedge clk); cyc++; end
    while (enc_busy) @(negedge clk);   // a cut stream lets the decoder finish first
    checks++;
    if (sidx != exp_syms.size()) begin
      failures++; $display("GOF %0d: %0d symbols, expected %0d", g, sidx, exp_syms.size());
    end
    foreach (exp_syms[i]) if (exp_syms[i].kind == SYM_BL) n_bl++;
    mse = 0;
    for (int a = 0; a < DEPTH; a++) begin
      longint e;
      e = dm[a];
      rd_addr = AW'(a); #1;
      checks++;
      if (longint'(rd_pix) != e) begin
        failures++;
        if (failures < 20) $display("pixel %0d: %0d expected %0d", a, rd_pix, e);
      end
      mse += real'(longint'(rd_pix) - pix[a]) ** 2;
    end
    mse = mse / DEPTH;
    $display("GOF %0d T=%0d/256 layers %0d: %0d symbols, %0d clocks, PSNR %0.2f dB", g, t, lay, sidx, cyc,
             10.0 * $log10(255.0 * 255.0 / (mse + 1e-9)));
    checks++;
    if (dec_proto_err) begin failures++; $display("decoder protocol error"); end
  endtask

  initial begin
    int nj;
    repeat (3) @(negedge clk);
    rst_n = 1;
    gof(0, 256, LEVELS);   n_t10++;
    gof(1, 410, LEVELS);   n_t16++;
    gof(2, 256, 1);        n_t10++;   // base layer + EL1 only
    nj = 0;
    for (int i = 0; i < 16; i++) if (jhist[i] != 0) nj++;
    $display("base-layer symbols %0d, zero vectors %0d, CS vectors %0d, indices used %0d",
             n_bl, n_zero, n_cs, nj);
    $display("AMP->IHT switches %0d, stalled cycles %0d, T=1.0 GOFs %0d, T=1.6 GOFs %0d, layer cuts %0d",
             n_switch, n_stall, n_t10, n_t16, n_cut);
    checks += 8;
    if (n_cut == 0) failures++;
    if (n_bl == 0) failures++;
    if (n_zero == 0) failures++;
    if (n_cs == 0) failures++;
    if (nj < 3) failures++;
    if (n_switch == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_t10 == 0 || n_t16 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
