// delay_line_tb: random data with random delay pulses; the output must
// equal the input sampled STAGES pulses earlier (reference: a history
// queue advanced on the same pulses), and must not move without a pulse.
module delay_line_tb;
  localparam int W = 12, S = 3;
  logic clk = 0, rst, tick;
  logic [W-1:0] d, q;
  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];

  delay_line #(.WIDTH(W), .STAGES(S)) dut (.clk, .rst, .tick, .d, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; tick = 0; d = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < S; i++) hist.push_back('0);
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      checks++;
      if (q !== hist[0]) begin failures++; $display("FAIL t=%0d q=%h exp=%h", t, q, hist[0]); end
      tick = ($urandom_range(0, 2) != 0);
      d = W'($urandom);
      @(posedge clk);
      if (tick) begin hist.push_back(d); void'(hist.pop_front()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
