// fifo_ctrl_tb: the FIFO control drives three FIFO chip models (a reduced
// depth of 16 words, so that full is reached). A producer offers words
// with a valid/ready handshake, a reader requests words at random; every
// word read must be the next one written (reference queue), reads of an
// empty FIFO must answer with bit 31 set, the producer must stall while
// the FIFO is full, a reset request must empty the FIFO, and each access
// must be answered two clocks after the request is seen (three when a
// write is under way).
module fifo_ctrl_tb;
  localparam int DEPTH = 16;
  logic clk = 0, rst, fifo_rst;
  logic [23:0] word, fifo_d, fifo_q;
  logic word_valid, word_ready, rd_req, rd_ack;
  logic [31:0] rd_data;
  logic fifo_w_n, fifo_r_n, fifo_rs_n, empty, full;
  logic [2:0] ef_n, ff_n;
  int checks = 0, failures = 0;
  int full_stalls = 0, empty_reads = 0, good_reads = 0, resets = 0;

  fifo_ctrl dut (
    .clk, .rst, .fifo_rst, .word, .word_valid, .word_ready, .rd_req, .rd_ack, .rd_data,
    .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q,
    .fifo_ef_n(ef_n[0]), .fifo_ff_n(ff_n[0]), .empty, .full
  );

  for (genvar k = 0; k < 3; k++) begin : g_chip
    logic [8:0] q9;
    idt7202_model #(.DEPTH(DEPTH)) u_chip (
      .d({1'b0, fifo_d[8*k +: 8]}), .q(q9), .w_n(fifo_w_n), .r_n(fifo_r_n),
      .rs_n(fifo_rs_n), .ef_n(ef_n[k]), .ff_n(ff_n[k])
    );
    assign fifo_q[8*k +: 8] = q9[7:0];
  end

  always #5 clk = ~clk;

  logic [23:0] model [$];
  bit pause = 0;
  int w_low_clocks = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Producer and reference: a word enters the queue in the clock the
  // design takes it; a new word is offered just after that edge
  initial begin
    word_valid = 0; word = '0;
    forever begin
      bit took;
      @(posedge clk);
      took = word_valid && word_ready;
      if (took) model.push_back(word);
      if (!fifo_w_n) w_low_clocks++;
      if (word_valid && !word_ready && full) full_stalls++;
      #1;
      if (rst) word_valid = 0;
      else if (took || !word_valid) begin
        word_valid = 0;
        if (!pause && $urandom_range(0, 3) != 0) begin word = 24'($urandom); word_valid = 1; end
      end
    end
  end

  task automatic do_read();
    int n = 0;
    @(negedge clk) rd_req = 1;
    @(negedge clk) rd_req = 0;
    while (!rd_ack) begin @(negedge clk); n++; if (n > 20) break; end
    checks++;
    if (model.size() == 0) begin
      empty_reads++;
      if (rd_data !== 32'h8000_0000) begin failures++; $display("FAIL empty read %h", rd_data); end
    end else begin
      logic [23:0] e;
      e = model.pop_front();
      good_reads++;
      if (rd_data !== {8'h00, e}) begin failures++; $display("FAIL read %h expected %h", rd_data, e); end
      checks++;
      if (n != 2 && n != 3) begin failures++; $display("FAIL read answered after %0d clocks, expected 2 (3 behind a write)", n); end
    end
  endtask


  initial begin
    rst = 1; fifo_rst = 0; rd_req = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (6) @(negedge clk);
    // let the FIFO fill up and stall the producer
    repeat (80) @(negedge clk);
    checks++;
    if (!full) begin failures++; $display("FAIL FIFO not full"); end
    for (int t = 0; t < 400; t++) begin
      if ($urandom_range(0, 1) == 0) do_read();
      else @(negedge clk);
    end
    // drain with the producer still running, then a reset
    repeat (40) do_read();
    @(negedge clk) fifo_rst = 1;
    @(negedge clk) fifo_rst = 0;
    model.delete();
    resets++;
    // producer may have a word in flight; reset clears everything
    wait (fifo_rs_n);
    @(negedge clk);
    model.delete();
    checks++;
    if (!(empty || word_valid)) begin failures++; $display("FAIL not empty after reset"); end
    repeat (60) begin if ($urandom_range(0,1) == 0) do_read(); else @(negedge clk); end
    // stop the producer and read past the end
    pause = 1;
    repeat (30) do_read();
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty after draining"); end
    checks++;
    if (full_stalls == 0 || empty_reads == 0 || good_reads < 50) begin
      failures++;
      $display("FAIL coverage stalls=%0d empty_reads=%0d reads=%0d", full_stalls, empty_reads, good_reads);
    end
    $display("full stalls=%0d empty reads=%0d reads=%0d resets=%0d", full_stalls, empty_reads, good_reads, resets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
