// clock_select: chooses the board clock (MCLK). With sel = 0 the VME
// system clock, 16 MHz by the VME standard, is halved to the 8 MHz board
// rate; with sel = 1 the external NIM clock (after its NIM-TTL converter)
// is used directly. The paper shows only a "CLOCK selection" block fed by
// the external clock and SYSCLK; the divide-by-two, the select input and
// its meaning are this design's choices. sel is meant to be static (a
// jumper): changing it while running can produce a short clock pulse.
module clock_select (
  input  logic sysclk,     // VME SYSCLK
  input  logic ext_clk,    // external clock, TTL level
  input  logic sel,        // 0: SYSCLK/2, 1: external clock
  output logic mclk
);
  logic half;     // start phase is irrelevant
  always_ff @(posedge sysclk) half <= ~half;
  assign mclk = sel ? ext_clk : half;
endmodule
