// vme_interrupter_tb: drives record events and interrupt acknowledge
// cycles. Checks: no request while disabled or at level 0; an event
// pulls exactly IRQ* line 'level'; an acknowledge cycle at that level with
// IACKIN* low is claimed (iack_hit) and the request is dropped on
// iack_done; an acknowledge cycle for another level, or with nothing
// pending, is passed down the daisy chain on IACKOUT*, which is released
// when AS* rises.
module vme_interrupter_tb;
  logic clk = 0, rst, irq_en, event_in, as_n, iack_n, iackin_n, iack_done;
  logic [2:0] level;
  logic [3:1] addr;
  logic iack_hit, iackout_n, pending;
  logic [7:1] irq_n;
  int checks = 0, failures = 0, claimed = 0, passed = 0;

  vme_interrupter dut (.clk, .rst, .irq_en, .event_in, .level, .as_n, .iack_n, .iackin_n,
                       .addr, .iack_done, .iack_hit, .irq_n, .iackout_n, .pending);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse_event();
    @(negedge clk) event_in = 1;
    @(negedge clk) event_in = 0;
  endtask

  // acknowledge cycle at level l; returns whether it was claimed / passed
  task automatic ack_cycle(input logic [2:0] l, output bit hit, output bit pass);
    hit = 0; pass = 0;
    @(negedge clk) begin addr = l; iack_n = 0; as_n = 0; end
    @(negedge clk) iackin_n = 0;
    repeat (6) begin
      @(negedge clk);
      if (iack_hit && !hit) begin hit = 1; iack_done = 1; end
      else iack_done = 0;
      if (!iackout_n) pass = 1;
    end
    iack_done = 0;
    as_n = 1; iack_n = 1; iackin_n = 1;
    repeat (4) @(negedge clk);
    chk(iackout_n, "IACKOUT* released after AS*");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit, pass;
    rst = 1; irq_en = 0; event_in = 0; as_n = 1; iack_n = 1; iackin_n = 1; iack_done = 0;
    level = 3'd3; addr = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    pulse_event();
    @(negedge clk);
    chk(irq_n == 7'h7F && !pending, "no request while disabled");
    irq_en = 1; level = 0;
    pulse_event();
    @(negedge clk);
    chk(irq_n == 7'h7F, "no request at level 0");
    for (int t = 0; t < 60; t++) begin
      logic [2:0] l;
      l = 3'($urandom_range(1, 7));
      level = l;
      pulse_event();
      @(negedge clk);
      chk(irq_n == ~(7'b1 << (l - 1)), "IRQ* line of the level");
      // a cycle for another level is passed on
      ack_cycle((l == 7) ? 3'd1 : l + 3'd1, hit, pass);
      chk(!hit && pass, "other level passed on");
      if (pass) passed++;
      chk(pending, "still pending");
      ack_cycle(l, hit, pass);
      chk(hit && !pass, "own level claimed");
      if (hit) claimed++;
      chk(!pending && irq_n == 7'h7F, "released on acknowledge");
      // nothing pending: passed on
      ack_cycle(l, hit, pass);
      chk(!hit && pass, "nothing pending passed on");
    end
    $display("claimed=%0d passed=%0d", claimed, passed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
