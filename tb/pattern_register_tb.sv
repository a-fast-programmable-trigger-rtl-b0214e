// pattern_register_tb: a reduced pattern register (20 inputs, 4 outputs,
// 3 delay stages, 2 words of 24 bits per record) is fed random patterns
// with a delay pulse every clock. Master-trigger pulses arrive at random,
// the FIFO side accepts words at random. A reference keeps the pattern
// history, builds the expected record (delayed pattern, zero reserved
// bits, running FIFO word address) at every accepted trigger and compares
// it word by word with what the register hands out. Triggers during a
// record must raise 'dropped' and must not produce a record; a FIFO reset
// (addr_clr) must restart the addresses at 0.
module pattern_register_tb;
  localparam int NI = 20, NO = 4, S = 3, WB = 24, NW = 2;
  localparam int PW = NI + NO;
  logic clk = 0, rst, tick, mtg, rec_en, addr_clr, word_ready;
  logic [NI-1:0] in_pat;
  logic [NO-1:0] out_pat;
  logic [WB-1:0] word;
  logic word_valid, busy, dropped;
  int checks = 0, failures = 0;
  int records = 0, drops = 0, clears = 0;

  pattern_register #(.N_IN(NI), .N_OUT(NO), .STAGES(S), .WORD_BITS(WB), .WORDS(NW)) dut (
    .clk, .rst, .tick, .in_pat, .out_pat, .mtg, .rec_en, .addr_clr,
    .word, .word_valid, .word_ready, .busy, .dropped
  );

  always #5 clk = ~clk;

  logic [PW-1:0]    hist [$];
  logic [WB-1:0]    exp_words [$];
  int               waddr = 0;
  bit               model_busy = 0;
  int               words_left = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model, evaluated on each rising edge with the values that
  // the design samples there
  always @(posedge clk) begin
    if (!rst) begin
      logic [PW-1:0] delayed;
      delayed = hist[0];
      if (addr_clr) waddr = 0;
      if (word_valid && word_ready) begin
        checks++;
        if (exp_words.size() == 0) begin
          failures++; $display("FAIL unexpected word %h", word);
        end else begin
          logic [WB-1:0] e;
          e = exp_words.pop_front();
          if (word !== e) begin failures++; $display("FAIL word %h expected %h", word, e); end
        end
        waddr = (waddr + 1) % 1024;
      end
      if (!model_busy && mtg && rec_en) begin
        logic [NW*WB-1:0] rec;
        rec = '0;
        rec[PW-1:0] = delayed;
        rec[PW+8 +: 10] = 10'(addr_clr ? 0 : waddr);
        for (int k = 0; k < NW; k++) exp_words.push_back(rec[k*WB +: WB]);
        model_busy = 1;
        words_left = NW;
        records++;
      end else if (model_busy) begin
        if (word_valid && word_ready) begin
          words_left--;
          if (words_left == 0) model_busy = 0;
        end
      end
      if (tick) begin hist.push_back({out_pat, in_pat}); void'(hist.pop_front()); end
    end
  end

  // dropped must follow a trigger that came while busy
  logic exp_drop;
  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if (dropped !== exp_drop) begin failures++; $display("FAIL dropped=%b exp=%b", dropped, exp_drop); end
      exp_drop <= busy && mtg;
      if (busy && mtg) drops++;
    end else exp_drop <= 1'b0;
  end

  initial begin
    rst = 1; tick = 1; mtg = 0; rec_en = 1; addr_clr = 0; word_ready = 0;
    in_pat = '0; out_pat = '0;
    for (int i = 0; i < S; i++) hist.push_back('0);
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_pat     = NI'($urandom);
      out_pat    = NO'($urandom);
      mtg        = ($urandom_range(0, 15) == 0);
      word_ready = ($urandom_range(0, 2) != 0);
      rec_en     = (t < 2500) ? 1'b1 : ($urandom_range(0, 1) == 1);
      addr_clr   = (t == 1500) && !busy;
      if (addr_clr) clears++;
    end
    mtg = 0; word_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_words.size() != 0) begin failures++; $display("FAIL %0d words never came", exp_words.size()); end
    checks++;
    if (records < 50 || drops < 5) begin failures++; $display("FAIL too few records %0d / drops %0d", records, drops); end
    $display("records=%0d drops=%0d address clears=%0d", records, drops, clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
