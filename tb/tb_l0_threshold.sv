// tb_l0_threshold: random vectors with many small coefficients; each output is checked
// against the hard-threshold rule and the count at the last element against the number
// of coefficients whose magnitude reaches T.
module tb_l0_threshold;
  import svc_pkg::*;
  localparam int N = 32;
  localparam int NW = $clog2(N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  coef_t thr = 32'sd256, in_data = '0, out_data;
  logic in_valid = 0, in_first = 0, nz;
  logic [NW-1:0] k_out;
  int checks = 0, failures = 0;

  l0_threshold #(.NVEC(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 40; v++) begin
      int kexp;
      kexp = 0;
      thr = (v % 2) ? 32'sd410 : 32'sd256;   // T = 1.6 and T = 1.0
      for (int e = 0; e < N; e++) begin
        longint d, mag;
        d = longint'($urandom_range(0, 1200)) - 600;
        if (e == 0 && v == 0) d = -256;
        if (e == 1 && v == 0) d = 255;
        mag = (d < 0) ? -d : d;
        if (mag >= longint'(thr)) kexp++;
        in_valid = 1; in_first = (e == 0); in_data = coef_t'(d);
        #1;
        checks++;
        if (longint'(out_data) != ((mag >= longint'(thr)) ? d : 0) || nz != (mag >= longint'(thr)))
          failures++;
        if (e == N - 1) begin
          checks++;
          if (int'(k_out) != kexp) begin
            failures++;
            $display("vector %0d: K %0d expected %0d", v, k_out, kexp);
          end
        end
        @(negedge clk);
      end
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
