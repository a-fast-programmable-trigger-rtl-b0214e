// idt7202_model: behavioural model of an asynchronous CMOS FIFO chip of
// the IDT 7202 kind (1024 words of 9 bits), for testbenches only. A word
// is written on the rising edge of W* and read on the falling edge of R*
// (the output then holds the word). EF* is low while empty, FF* low while
// full, and RS* low empties the chip. Writes to a full chip and reads of
// an empty one are ignored. Depth is a parameter so that full can be
// reached quickly. Not synthesizable; no access times are modelled.
module idt7202_model #(
  parameter int DEPTH = 1024,
  parameter int W     = 9
) (
  input  logic [W-1:0] d,
  output logic [W-1:0] q,
  input  logic         w_n,
  input  logic         r_n,
  input  logic         rs_n,
  output logic         ef_n,
  output logic         ff_n
);
  logic [W-1:0] mem [DEPTH];
  int wp = 0, rp = 0, count = 0;

  initial q = '0;

  always @(posedge w_n) begin
    if (rs_n && count < DEPTH) begin
      mem[wp] = d;
      wp = (wp + 1) % DEPTH;
      count++;
    end
  end

  always @(negedge r_n) begin
    if (rs_n && count > 0) begin
      q = mem[rp];
      rp = (rp + 1) % DEPTH;
      count--;
    end
  end

  always @(negedge rs_n) begin
    wp = 0; rp = 0; count = 0;
  end

  always_comb begin
    ef_n = (count != 0);
    ff_n = (count != DEPTH);
  end
endmodule
