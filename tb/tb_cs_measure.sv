// tb_cs_measure: sparse vectors (K from 0 up to N) are streamed in; the header must carry
// the K and index j of the table, and the M measurements must equal the reference product
// Phi_j * s. With out_ready held high the vector must take exactly N + 1 + M*(K+1)
// clocks (K+1 per measurement); further vectors are run with random back-pressure.
module tb_cs_measure;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int N = 64, MDIV = 16;
  localparam int NW = $clog2(N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_nz = 0, in_last = 0, out_valid, out_ready = 0, out_hdr;
  coef_t in_data = '0, out_y;
  logic [NW-1:0] in_k = '0;
  logic [3:0] out_j;
  logic [15:0] out_k;
  int checks = 0, failures = 0;

  cs_measure #(.NVEC(N), .MDIV(MDIV)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int kk, input bit bp);
    longint s [], y [];
    int jj, mm, cyc, got;
    s = new[N];
    for (int c = 0; c < N; c++) s[c] = 0;
    for (int t = 0; t < kk; t++) begin
      int c;
      do c = $urandom_range(0, N - 1); while (s[c] != 0);
      s[c] = longint'($urandom_range(1, 100000)) * ($urandom_range(0, 1) ? 1 : -1);
    end
    jj = j_ref(kk, MDIV);
    mm = m_ref(jj, MDIV);
    measure_ref(s, jj, mm, y);
    cyc = 0;
    for (int c = 0; c < N; c++) begin
      in_valid = 1; in_data = coef_t'(s[c]); in_nz = (s[c] != 0); in_last = (c == N - 1);
      in_k = NW'(kk);
      #1;
      if (!in_ready) begin failures++; $display("not ready while collecting"); end
      @(negedge clk); cyc++;
    end
    in_valid = 0; in_last = 0;
    got = -1;
    while (got < mm) begin
      out_ready = bp ? ($urandom_range(0, 2) == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (got < 0) begin
          if (!out_hdr || int'(out_j) != jj || int'(out_k) != kk) begin
            failures++; $display("header j=%0d K=%0d, expected %0d %0d", out_j, out_k, jj, kk);
          end
        end else if (out_hdr || longint'(out_y) != y[got]) begin
          failures++;
          if (failures < 10) $display("K=%0d y[%0d]=%0d expected %0d", kk, got, out_y, y[got]);
        end
        got++;
      end
      @(negedge clk); cyc++;
    end
    out_ready = 0;
    if (!bp) begin
      checks++;
      if (cyc != N + 1 + mm * ((kk == 0 ? 0 : kk) + 1)) begin
        failures++;
        $display("K=%0d: %0d clocks, expected %0d", kk, cyc, N + 1 + mm * (kk + 1));
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    one(0, 0);
    for (int t = 0; t < 12; t++) one($urandom_range(1, 12), t[0]);
    one(N, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
