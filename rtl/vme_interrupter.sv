// vme_interrupter: VME interrupter of the board. When interrupts are
// enabled, each complete pattern-register record (event pulse) sets a
// pending request, which pulls IRQ* line 'level' low. An interrupt
// acknowledge cycle (IACK* low, AS* low) whose A[3:1] equals 'level' is
// claimed when the daisy-chain input IACKIN* arrives low and a request is
// pending: iack_hit tells the cycle control to return 'vector' on D[7:0]
// with DTACK*, and its iack_done pulse releases the request (release on
// acknowledge). Otherwise IACKIN* is passed on to IACKOUT*, which is
// released when AS* goes high. The strobes are sampled through two
// flip-flops, so the daisy chain adds 2-3 clocks. The paper names an
// interrupter among the CPLD's blocks; its trigger event, request level,
// vector and release policy are this design's.
module vme_interrupter (
  input  logic       clk,
  input  logic       rst,
  input  logic       irq_en,
  input  logic       event_in,     // one-clock pulse: a record was stored
  input  logic [2:0] level,        // 1..7; 0 disables the request
  input  logic       as_n,
  input  logic       iack_n,
  input  logic       iackin_n,
  input  logic [3:1] addr,
  input  logic       iack_done,
  output logic       iack_hit,
  output logic [7:1] irq_n,
  output logic       iackout_n,
  output logic       pending
);
  logic [1:0] as_s, iack_s, iackin_s;
  logic       in_iack, passing, claimed;

  always_ff @(posedge clk) begin
    if (rst) begin
      as_s <= '1; iack_s <= '1; iackin_s <= '1;
    end else begin
      as_s     <= {as_s[0], as_n};
      iack_s   <= {iack_s[0], iack_n};
      iackin_s <= {iackin_s[0], iackin_n};
    end
  end
  assign in_iack = !as_s[1] && !iack_s[1] && !iackin_s[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      pending   <= 1'b0;
      passing   <= 1'b0;
      claimed   <= 1'b0;
      iackout_n <= 1'b1;
    end else begin
      if (iack_done) claimed <= 1'b1;
      if (iack_done)                              pending <= 1'b0;
      else if (event_in && irq_en && level != 0)  pending <= 1'b1;
      if (as_s[1]) begin
        passing   <= 1'b0;
        claimed   <= 1'b0;
        iackout_n <= 1'b1;
      end else if (in_iack && !iack_hit && !passing && !claimed && !iack_done) begin
        passing   <= 1'b1;
        iackout_n <= 1'b0;
      end
    end
  end

  assign iack_hit = in_iack && !passing && !claimed && pending && (addr == level);

  always_comb begin
    irq_n = '1;
    for (int l = 1; l <= 7; l++)
      if (pending && level == 3'(l)) irq_n[l] = 1'b0;
  end
endmodule
