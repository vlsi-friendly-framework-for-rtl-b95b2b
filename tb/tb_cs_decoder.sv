// tb_cs_decoder: the reference encoder's symbol stream for one GOF of test video is fed
// to the decoder with random gaps; the reconstructed pixels are compared with the
// reference decoder. A second run inserts a stray symbol of the wrong kind and expects
// the protocol error flag.
module tb_cs_decoder;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int W = 64, H = 32, GOF = 8, LEVELS = 3, N = 32, MDIV = 80, ITER = 20;
  localparam int DEPTH = W * H * GOF;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, sym_valid = 0, sym_ready, proto_err;
  logic [3:0] layers = 4'(LEVELS);
  sym_t sym = '0;
  logic [AW-1:0] rd_addr = '0;
  logic [7:0] rd_pix;
  int checks = 0, failures = 0;

  cs_decoder #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(N), .MDIV(MDIV),
               .ITER(ITER)) dut (.*);

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint pix [], rec [];
    sym_t syms [$];
    int si;
    real mse;
    repeat (3) @(negedge clk);
    rst_n = 1;
    video_ref(pix, W, H, GOF, 0);
    encode_ref(pix, W, H, GOF, LEVELS, N, MDIV, 256, 8, 16, syms);
    decode_ref(syms, W, H, GOF, LEVELS, N, MDIV, ITER, 8, rec);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0; si = 0;
    while (!done) begin
      sym_valid = (si < syms.size()) && ($urandom_range(0, 3) != 0);
      if (si < syms.size()) sym = syms[si];
      #1;
      if (sym_valid && sym_ready) si++;
      @(negedge clk);
    end
    sym_valid = 0;
    checks++;
    if (si != syms.size() || proto_err) begin
      failures++; $display("consumed %0d of %0d symbols, proto_err %0d", si, syms.size(), proto_err);
    end
    mse = 0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a); #1;
      checks++;
      if (longint'(rd_pix) != rec[a]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %0d expected %0d", a, rd_pix, rec[a]);
      end
      mse += real'(longint'(rd_pix) - pix[a]) ** 2;
    end
    $display("PSNR %0.2f dB", 10.0 * $log10(255.0 * 255.0 / (mse / DEPTH + 1e-9)));
    // A measurement where a base-layer symbol is due must raise the error flag.
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    sym = '0; sym.kind = SYM_MEAS; sym_valid = 1;
    @(negedge clk);
    sym_valid = 0;
    checks++;
    if (!proto_err) begin failures++; $display("protocol error not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
