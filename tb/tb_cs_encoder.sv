// tb_cs_encoder: one GOF of test video through the encoder with random back-pressure on
// the symbol stream, for T = 1.0 and T = 1.6; every symbol is compared with the reference
// encoder, and the stream must end with done.
module tb_cs_encoder;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int W = 64, H = 32, GOF = 8, LEVELS = 3, N = 32, MDIV = 80;
  localparam int DEPTH = W * H * GOF;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_we = 0, start = 0, busy, done, sym_valid, sym_ready = 0;
  logic [AW-1:0] pix_addr = '0;
  logic [7:0] pix_data = '0;
  coef_t thr = 32'sd256;
  sym_t sym;
  int checks = 0, failures = 0;

  cs_encoder #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(N), .MDIV(MDIV)) dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int g, input longint t);
    longint pix [];
    sym_t exp [$];
    int si;
    video_ref(pix, W, H, GOF, g);
    encode_ref(pix, W, H, GOF, LEVELS, N, MDIV, t, 8, 16, exp);
    thr = coef_t'(t);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = AW'(a); pix_data = 8'(pix[a]);
    end
    @(negedge clk);
    pix_we = 0; start = 1;
    @(negedge clk);
    start = 0; si = 0;
    while (!done) begin
      sym_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (sym_valid && sym_ready) begin
        checks++;
        if (si >= exp.size() || sym != exp[si]) begin
          failures++;
          if (failures < 10) $display("symbol %0d: kind %0d j %0d k %0d data %0d", si,
                                      sym.kind, sym.j, sym.k, sym.data);
        end
        si++;
      end
      @(negedge clk);
    end
    checks++;
    if (si != exp.size()) begin failures++; $display("%0d symbols, expected %0d", si, exp.size()); end
    $display("GOF %0d: %0d symbols", g, si);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(0, 256);
    one(1, 410);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
