// tb_dwt3d: loads a random group of frames, runs the forward 3-D DWT and compares every
// coefficient with the reference model, then runs the inverse and compares with the
// reference inverse and with the original pixels (within a small rounding tolerance).
module tb_dwt3d;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int W = 16, H = 8, GOF = 8, LEVELS = 3;
  localparam int DEPTH = W * H * GOF;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, inverse = 0, busy, done, ext_we = 0;
  logic [AW-1:0] ext_addr = '0;
  coef_t ext_wdata = '0, ext_rdata;
  int checks = 0, failures = 0;

  dwt3d #(.W(W), .H(H), .GOF(GOF), .LEVELS(LEVELS)) dut (.*);

  longint refm [], orig [];
  int cyc;

  task automatic run(input bit inv);
    @(negedge clk);
    inverse = inv; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int maxerr;
    refm = new[DEPTH];
    orig = new[DEPTH];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      orig[a] = longint'($urandom_range(0, 255)) <<< FRAC;
      refm[a] = orig[a];
      @(negedge clk);
      ext_we = 1; ext_addr = AW'(a); ext_wdata = coef_t'(orig[a]);
    end
    @(negedge clk);
    ext_we = 0;
    dwt3d_ref(refm, W, H, GOF, LEVELS, 0);
    run(0);
    $display("forward: %0d cycles", cyc);
    for (int a = 0; a < DEPTH; a++) begin
      ext_addr = AW'(a); #1;
      checks++;
      if (longint'(ext_rdata) != refm[a]) begin
        failures++;
        if (failures < 10) $display("fwd mismatch @%0d: %0d vs %0d", a, ext_rdata, refm[a]);
      end
    end
    dwt3d_ref(refm, W, H, GOF, LEVELS, 1);
    run(1);
    $display("inverse: %0d cycles", cyc);
    maxerr = 0;
    for (int a = 0; a < DEPTH; a++) begin
      longint e;
      ext_addr = AW'(a); #1;
      checks++;
      if (longint'(ext_rdata) != refm[a]) begin
        failures++;
        if (failures < 10) $display("inv mismatch @%0d: %0d vs %0d", a, ext_rdata, refm[a]);
      end
      e = longint'(ext_rdata) - orig[a];
      if (e < 0) e = -e;
      if (e > maxerr) maxerr = int'(e);
    end
    checks++;
    $display("max reconstruction error %0d/256 pixel", maxerr);
    if (maxerr > 64) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
