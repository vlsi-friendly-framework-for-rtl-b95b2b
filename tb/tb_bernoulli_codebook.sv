// tb_bernoulli_codebook: compares a sweep of entries of several matrices with the
// reference definition of the codebook, and checks that each matrix is balanced
// (close to half -1 entries) and that different indices give different matrices.
module tb_bernoulli_codebook;
  import svc_ref_pkg::*;
  localparam int LANES = 4;
  logic [3:0] j;
  logic [15:0] row, col;
  logic [LANES-1:0] neg;
  int checks = 0, failures = 0;
  bernoulli_codebook #(.LANES(LANES)) dut (.*);
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int jj = 1; jj < 16; jj += 2) begin
      int ones, diff, tot;
      ones = 0; diff = 0; tot = 0;
      for (int r = 0; r < 64; r += LANES)
        for (int c = 0; c < 64; c++) begin
          j = 4'(jj); row = 16'(r); col = 16'(c);
          #1;
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (neg[l] != bern_ref(jj, r + l, c)) failures++;
            ones += neg[l];
            diff += (bern_ref(jj, r + l, c) != bern_ref(jj - 1, r + l, c));
            tot++;
          end
        end
      checks += 2;
      if (ones < tot * 45 / 100 || ones > tot * 55 / 100) begin
        failures++; $display("j=%0d unbalanced: %0d of %0d", jj, ones, tot);
      end
      if (diff < tot * 40 / 100) begin failures++; $display("j=%0d too close to j-1", jj); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
