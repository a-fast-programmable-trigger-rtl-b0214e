// delay_line: STAGES-deep shift register, WIDTH bits wide, that advances
// once per delay pulse (tick). With the paper's 8 MHz delay pulse
// (125 ns) six stages give 750 ns, the nearest whole number of pulses to
// the paper's "approximately 800 ns"; the stage count is this design's
// choice and a parameter. Output q is the input as sampled STAGES ticks
// earlier. Synchronous, active-high reset clears every stage.
module delay_line #(
  parameter int unsigned WIDTH  = 148,
  parameter int unsigned STAGES = 6
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             tick,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] sr [STAGES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(STAGES); i++) sr[i] <= '0;
    end else if (tick) begin
      sr[0] <= d;
      for (int i = 1; i < int'(STAGES); i++) sr[i] <= sr[i-1];
    end
  end

  assign q = sr[STAGES-1];
endmodule
