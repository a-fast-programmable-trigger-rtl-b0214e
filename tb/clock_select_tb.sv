// clock_select_tb: with the select low the board clock must toggle on
// every rising edge of SYSCLK (half its rate); with it high it must follow
// the external clock. Rising edges are counted over a fixed window and
// compared with the expected counts.
module clock_select_tb;
  logic sysclk = 0, ext_clk = 0, sel, mclk;
  int checks = 0, failures = 0;
  int n_mclk, n_sys, n_ext;

  clock_select dut (.sysclk, .ext_clk, .sel, .mclk);

  always #31 sysclk = ~sysclk;      // ~16 MHz
  always #50 ext_clk = ~ext_clk;    // 10 MHz

  always @(posedge mclk)    n_mclk++;
  always @(posedge sysclk)  n_sys++;
  always @(posedge ext_clk) n_ext++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sel = 0;
    #1000;
    n_mclk = 0; n_sys = 0;
    #62000;
    checks++;
    if (n_mclk < n_sys / 2 - 1 || n_mclk > n_sys / 2 + 1) begin
      failures++; $display("FAIL SYSCLK/2: mclk=%0d sysclk=%0d", n_mclk, n_sys);
    end
    // every mclk edge must coincide with a sysclk rising edge
    for (int i = 0; i < 20; i++) begin
      @(posedge mclk);
      checks++;
      if (sysclk !== 1'b1) begin failures++; $display("FAIL mclk edge not on sysclk edge"); end
    end
    sel = 1;
    #1000;
    n_mclk = 0; n_ext = 0;
    #50000;
    checks++;
    if (n_mclk < n_ext - 1 || n_mclk > n_ext + 1) begin
      failures++; $display("FAIL external: mclk=%0d ext=%0d", n_mclk, n_ext);
    end
    for (int i = 0; i < 20; i++) begin
      #7;
      checks++;
      if (mclk !== ext_clk) begin failures++; $display("FAIL mclk != ext_clk"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
