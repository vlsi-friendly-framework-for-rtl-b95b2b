// tb_subband_scan: walks the whole scan and compares every address and flag with a list
// built from the layer order (base layer, then levels 3, 2, 1; L-frame slots give HL, LH,
// HH, H-frame slots all four quadrants; column-wise vectors of N). It also checks that the
// scan covers every word of the GOF buffer exactly once, and that it stalls when adv is low.
module tb_subband_scan;
  localparam int W = 64, H = 16, GOF = 8, LEVELS = 3, N = 16;
  localparam int AW = $clog2(GOF * W * H);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, adv = 0, valid, done, is_bl, vec_first, vec_last;
  logic [AW-1:0] addr;
  logic [3:0] level;
  int checks = 0, failures = 0;

  subband_scan #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS), .NVEC(N)) dut (.*);

  int exp_addr [$];
  bit exp_bl [$];
  int exp_lv [$];
  int seen [GOF * W * H];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_band(input int f, input int l, input int q, input bit bl);
    int ws = W >> l, hs = H >> l;
    int x0 = (q % 2) ? ws : 0, y0 = (q / 2) ? hs : 0;
    for (int c = 0; c < ws; c++)
      for (int r = 0; r < hs; r++) begin
        exp_addr.push_back(f * W * H + (y0 + r) * W + x0 + c);
        exp_bl.push_back(bl);
        exp_lv.push_back(l);
      end
  endtask

  initial begin
    int i, vpos, stalls;
    push_band(0, LEVELS, 0, 1);
    for (int l = LEVELS; l >= 1; l--) begin
      int fl;
      fl = GOF >> (l - 1);
      for (int f = 0; f < fl; f++)
        for (int q = (f < fl / 2) ? 1 : 0; q < 4; q++) push_band(f, l, q, 0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    i = 0; vpos = 0; stalls = 0;
    while (valid) begin
      adv = ($urandom_range(0, 3) != 0);
      #1;
      if (adv) begin
        checks++;
        if (i >= exp_addr.size() || int'(addr) != exp_addr[i] || is_bl != exp_bl[i] || int'(level) != exp_lv[i] ||
            vec_first != (!exp_bl[i] && vpos == 0) || vec_last != (!exp_bl[i] && vpos == N - 1)) begin
          failures++;
          if (failures < 10) $display("step %0d: addr %0d bl %0d first %0d last %0d", i, addr,
                                      is_bl, vec_first, vec_last);
        end
        if (int'(addr) < GOF * W * H) seen[addr]++;
        if (!exp_bl[i]) vpos = (vpos + 1) % N;
        i++;
      end else stalls++;
      @(negedge clk);
    end
    adv = 0;
    checks++;
    if (i != exp_addr.size()) begin failures++; $display("%0d steps, expected %0d", i, exp_addr.size()); end
    for (int a = 0; a < GOF * W * H; a++) begin
      checks++;
      if (seen[a] != 1) failures++;
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
