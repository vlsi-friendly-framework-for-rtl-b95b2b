// tb_haar_lift: random pairs through the forward step (checked against H = b - a,
// L = a + floor(H/2)) and back through the inverse (checked to restore the pair exactly).
module tb_haar_lift;
  import svc_pkg::*;
  logic inverse;
  coef_t in_a, in_b, out_a, out_b;
  int checks = 0, failures = 0;
  haar_lift dut (.*);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 1000; t++) begin
      longint a, b, hh, ll;
      a = longint'($urandom_range(0, 1 << 20)) - (1 << 19);
      b = longint'($urandom_range(0, 1 << 20)) - (1 << 19);
      if (t == 0) begin a = 5; b = 2; end
      hh = b - a;
      ll = a + ((hh < 0) ? -((-hh + 1) / 2) : hh / 2);
      inverse = 0; in_a = coef_t'(a); in_b = coef_t'(b); #1;
      checks += 2;
      if (longint'(out_a) != ll) failures++;
      if (longint'(out_b) != hh) failures++;
      inverse = 1; in_a = coef_t'(ll); in_b = coef_t'(hh); #1;
      checks += 2;
      if (longint'(out_a) != a) failures++;
      if (longint'(out_b) != b) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
