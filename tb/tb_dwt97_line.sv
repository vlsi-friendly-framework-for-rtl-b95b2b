// tb_dwt97_line: random lines of several even lengths through the forward and the inverse
// transform; outputs are compared with the reference lifting model and the latency from
// start to done with 3*LEN + 1 clocks.
module tb_dwt97_line;
  import svc_pkg::*;
  import svc_ref_pkg::*;
  localparam int LMAX = 64;
  localparam int LW = $clog2(LMAX + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [LW-1:0] len = '0, wr_idx = '0, rd_idx = '0;
  logic inverse = 0, wr_en = 0, start = 0, busy, done;
  coef_t wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  dwt97_line #(.LMAX(LMAX)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int n, input bit inv);
    longint x [];
    int cyc;
    x = new[n];
    for (int i = 0; i < n; i++) x[i] = longint'($urandom_range(0, 65535)) - 32768;
    @(negedge clk);
    len = LW'(n); inverse = inv;
    for (int i = 0; i < n; i++) begin
      wr_en = 1; wr_idx = LW'(i); wr_data = coef_t'(x[i]);
      @(negedge clk);
    end
    wr_en = 0; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 3 * n + 1) begin
      failures++;
      $display("latency %0d, expected %0d", cyc, 3 * n + 1);
    end
    lift1d(x, n, inv);
    for (int i = 0; i < n; i++) begin
      rd_idx = LW'(i); #1;
      checks++;
      if (longint'(rd_data) != x[i]) begin
        failures++;
        if (failures < 10) $display("len %0d inv %0d idx %0d: %0d vs %0d", n, inv, i, rd_data, x[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int n;
      n = (t % 4 == 0) ? 2 : 2 * int'($urandom_range(2, LMAX / 2));
      one(n, t[0]);
    end
    one(LMAX, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
