// icn_sum_tb: random and extreme sets of five section counts are added by
// the summing logic and compared with the integer sum.
module icn_sum_tb;
  logic [19:0] icn_in;
  logic [6:0]  total;
  int checks = 0, failures = 0;

  icn_sum dut (.icn_in, .total);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int t = 0; t < 500; t++) begin
      if (t == 0) icn_in = '0;
      else if (t == 1) icn_in = '1;
      else icn_in = 20'($urandom);
      #1;
      s = 0;
      for (int k = 0; k < 5; k++) s += int'(icn_in[4*k +: 4]);
      checks++;
      if (int'(total) != s) begin failures++; $display("FAIL in=%h total=%0d exp=%0d", icn_in, total, s); end
    end
    checks++;
    if (total == 0) ; // keep last
    icn_in = '1; #1;
    if (total != 75) begin failures++; $display("FAIL max total=%0d", total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
