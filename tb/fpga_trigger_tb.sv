// fpga_trigger_tb: the FPGA trigger logic at its default size (12 x 11
// cells, 16 outputs, 6 delay stages). Random inverted input patterns
// (active low, as the ECL receivers deliver them) must give the reference
// ICN on outputs [3:0] within the same time step, with no clock edge in
// between (the combinational path), and all-zero outputs while the
// trigger output is stopped. Asynchronous MTG pulses must produce an
// internal trigger pulse two clocks later and a 7-word record holding the
// inputs and outputs of 6 clocks before that pulse, the zero reserved bits
// and the running word address. A second instance with the summing logic
// must output the sum of five 4-bit counts.
module fpga_trigger_tb;
  import ccm_pkg::*;
  localparam int R = 12, C = 11, N = R * C, S = 6;
  logic clk = 0, rst, trig_en, mtg_in, rec_en, addr_clr, word_ready;
  logic [N-1:0] trig_n;
  logic [15:0] occn, occn_sum;
  logic [3:0] icn, icn_sum_mon;
  logic [23:0] word;
  logic word_valid, rec_busy, rec_dropped, mtg_pulse;
  int checks = 0, failures = 0, records = 0;

  fpga_trigger dut (.clk, .rst, .trig_n, .occn, .icn, .trig_en, .mtg_in, .rec_en, .addr_clr,
    .fifo_word(word), .fifo_word_valid(word_valid), .fifo_word_ready(word_ready),
    .rec_busy, .rec_dropped, .mtg_pulse);

  logic [23:0] w2; logic v2, b2, d2, p2;
  fpga_trigger #(.LOGIC(LOGIC_SUM)) dut_sum (.clk, .rst, .trig_n, .occn(occn_sum), .icn(icn_sum_mon),
    .trig_en, .mtg_in(1'b0), .rec_en(1'b0), .addr_clr(1'b0),
    .fifo_word(w2), .fifo_word_valid(v2), .fifo_word_ready(1'b1),
    .rec_busy(b2), .rec_dropped(d2), .mtg_pulse(p2));

  always #62 clk = ~clk;     // 8 MHz board clock

  function automatic bit at(input logic [N-1:0] h, input int r, input int c);
    if (r < 0 || r >= R || c < 0 || c >= C) return 0;
    return h[r*C + c];
  endfunction
  function automatic int ref_icn(input logic [N-1:0] h);
    int n = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (at(h,r,c) && !at(h,r-1,c) && !at(h,r,c+1) && !(at(h,r+1,c) && at(h,r+1,c+1))) n++;
    return n > 15 ? 15 : n;
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference for the pattern register
  logic [147:0] hist [$];
  logic [23:0]  exp_words [$];
  int waddr = 0, mtg_edges = 0, since_mtg = -1;
  always @(posedge clk) begin
    if (!rst) begin
      if (word_valid && word_ready) begin
        checks++;
        if (exp_words.size() == 0 || word !== exp_words[0]) begin
          failures++; $display("FAIL record word %h", word);
        end
        if (exp_words.size() != 0) void'(exp_words.pop_front());
        waddr++;
      end
      if (mtg_pulse && !rec_busy && rec_en) begin
        logic [167:0] rec;
        rec = '0;
        rec[147:0] = hist[0];
        rec[165:156] = 10'(waddr);
        for (int k = 0; k < 7; k++) exp_words.push_back(rec[24*k +: 24]);
        records++;
      end
      if (mtg_pulse) begin
        chk(since_mtg == 2, $sformatf("MTG pulse %0d clocks after MTG", since_mtg));
        since_mtg = -1;
      end else if (since_mtg >= 0) since_mtg++;
      hist.push_back({occn, ~trig_n}); void'(hist.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; trig_en = 1; mtg_in = 0; rec_en = 1; addr_clr = 0; word_ready = 1; trig_n = '1;
    for (int i = 0; i < S; i++) hist.push_back('0);
    repeat (4) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 600; t++) begin
      logic [N-1:0] h;
      @(negedge clk);
      for (int i = 0; i < N; i++) h[i] = ($urandom_range(0, 99) < 6);
      trig_en = (t % 50) < 45;
      #3 trig_n = ~h;
      #1;
      chk(occn == (trig_en ? 16'(ref_icn(h)) : 16'h0), $sformatf("occn=%h icn=%0d", occn, ref_icn(h)));
      chk(icn == 4'(ref_icn(h)), "monitor icn");
      begin
        int s;
        s = 0;
        for (int k = 0; k < 5; k++) s += int'(h[4*k +: 4]);
        chk(occn_sum == (trig_en ? 16'(s) : 16'h0), "summing logic");
      end
      word_ready = ($urandom_range(0, 3) != 0);
      // asynchronous MTG, held for two clocks, between clock edges
      if (t % 23 == 5 && !mtg_in) begin
        #17 mtg_in = 1;
        since_mtg = 0;
      end else if (mtg_in && t % 23 == 7) mtg_in = 0;
    end
    mtg_in = 0; word_ready = 1;
    repeat (20) @(negedge clk);
    chk(exp_words.size() == 0, "all record words delivered");
    chk(records >= 20, $sformatf("records %0d", records));
    $display("records=%0d", records);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
