// tb_index_finder: every K from 0 to 2200 is mapped and compared with the table of K
// ranges, indices and numbers of measurements (written out here as ranges), for the
// full table (MDIV = 1).
module tb_index_finder;
  logic [15:0] k;
  logic [3:0] j;
  logic [11:0] m;
  int checks = 0, failures = 0;
  index_finder #(.MDIV(1), .KW(16)) dut (.*);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ej, em;
    for (int kk = 0; kk <= 2200; kk++) begin
      if (kk == 0) begin ej = 0; em = 0; end
      else if (kk <= 10)  begin ej = 1;  em = 50;   end
      else if (kk <= 20)  begin ej = 2;  em = 130;  end
      else if (kk <= 50)  begin ej = 3;  em = 240;  end
      else if (kk <= 100) begin ej = 4;  em = 370;  end
      else if (kk <= 150) begin ej = 5;  em = 470;  end
      else if (kk <= 200) begin ej = 6;  em = 650;  end
      else if (kk <= 250) begin ej = 7;  em = 780;  end
      else if (kk <= 300) begin ej = 8;  em = 920;  end
      else if (kk <= 350) begin ej = 9;  em = 1080; end
      else if (kk <= 400) begin ej = 10; em = 1220; end
      else if (kk <= 450) begin ej = 11; em = 1400; end
      else if (kk <= 500) begin ej = 12; em = 1550; end
      else if (kk <= 550) begin ej = 13; em = 1700; end
      else if (kk <= 600) begin ej = 14; em = 1850; end
      else begin ej = 15; em = 2000; end
      k = 16'(kk);
      #1;
      checks++;
      if (int'(j) != ej || int'(m) != em) begin
        failures++;
        if (failures < 10) $display("K=%0d: j=%0d M=%0d, expected %0d %0d", kk, j, m, ej, em);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
