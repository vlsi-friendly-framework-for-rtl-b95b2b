// tb_quantizer: random and edge values compared with round-half-up division by 2^QSHIFT
// and saturation to QBITS signed bits.
module tb_quantizer;
  import svc_pkg::*;
  localparam int QS = 8, QB = 16;
  coef_t x, q;
  logic sat;
  int checks = 0, failures = 0;
  quantizer #(.QSHIFT(QS), .QBITS(QB)) dut (.*);
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 5000; t++) begin
      longint v, e, lim;
      bit es;
      v = longint'($urandom_range(0, 1 << 26)) - (1 << 25);
      if (t == 0) v = 128;
      if (t == 1) v = -128;
      if (t == 2) v = -129;
      if (t == 3) v = 32'h7fffffff;
      e = (v + 128);
      e = (e >= 0) ? e / 256 : -((-e + 255) / 256);
      lim = 32767;
      es = 0;
      if (e > lim) begin e = lim; es = 1; end
      if (e < -lim - 1) begin e = -lim - 1; es = 1; end
      x = coef_t'(v);
      #1;
      checks++;
      if (longint'(q) != e || sat != es) begin
        failures++;
        if (failures < 10) $display("x=%0d q=%0d expected %0d", v, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
