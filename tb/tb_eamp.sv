// tb_eamp: sparse vectors with known K are measured with the reference codebook, the
// measurements are loaded into the EAMP engine, and its result is compared word for word
// with the reference EAMP (full stable sort instead of radix selection). The run time is
// checked against the schedule INIT + ITER * (2*M*N + 34*N + 1) clocks, and the
// recovery error against the true vector is reported.
module tb_eamp;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int N = 64, MDIV = 16, ITER = 400, RS = 24;
  localparam int NW = $clog2(N + 1);
  localparam int MCAP = (2000 + MDIV - 1) / MDIV;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic y_we = 0, start = 0, busy, done, iht_phase;
  logic [11:0] y_idx = '0;
  coef_t y_data = '0, s_data;
  logic [3:0] j = '0;
  logic [15:0] k = '0;
  logic [NW-1:0] s_idx = '0;
  int checks = 0, failures = 0;

  eamp #(.NVEC(N), .MDIV(MDIV), .ITER(ITER), .RS(RS)) dut (.*);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int kk);
    longint s [], y [], sr [];
    int jj, mm, cyc, iht_seen;
    real err, pw;
    s = new[N]; sr = new[N];
    for (int c = 0; c < N; c++) s[c] = 0;
    for (int t = 0; t < kk; t++) begin
      int c;
      do c = $urandom_range(0, N - 1); while (s[c] != 0);
      s[c] = longint'($urandom_range(256, 8192)) * ($urandom_range(0, 1) ? 1 : -1);
    end
    jj = j_ref(kk, MDIV);
    mm = m_ref(jj, MDIV);
    measure_ref(s, jj, mm, y);
    eamp_ref(y, jj, kk, MDIV, ITER, RS, sr);
    for (int r = 0; r < mm; r++) begin
      @(negedge clk);
      y_we = 1; y_idx = 12'(r); y_data = coef_t'(y[r]);
    end
    @(negedge clk);
    y_we = 0; j = 4'(jj); k = 16'(kk); start = 1;
    @(negedge clk);
    start = 0; cyc = 1; iht_seen = 0;
    while (!done) begin @(negedge clk); cyc++; if (iht_phase) iht_seen++; end
    checks++;
    if (cyc != ((N > MCAP) ? N : MCAP) + ITER * (2 * mm * N + 34 * N + 1) + 1) begin
      failures++;
      $display("K=%0d: %0d cycles, schedule says %0d", kk, cyc,
               ((N > MCAP) ? N : MCAP) + ITER * (2 * mm * N + 34 * N + 1) + 1);
    end
    checks++;
    if (iht_seen == 0) begin failures++; $display("IHT phase never entered"); end
    err = 0; pw = 0;
    for (int c = 0; c < N; c++) begin
      s_idx = NW'(c); #1;
      checks++;
      if (longint'(s_data) != sr[c]) begin
        failures++;
        if (failures < 10) $display("K=%0d c=%0d: %0d vs ref %0d", kk, c, s_data, sr[c]);
      end
      err += real'(longint'(s_data) - s[c]) ** 2;
      pw  += real'(s[c]) ** 2;
    end
    $display("K=%0d j=%0d M=%0d: %0d cycles, NMSE vs true vector %g", kk, jj, mm, cyc, err / pw);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one(2);
    one(5);
    one(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
