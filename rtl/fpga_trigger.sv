// fpga_trigger: the trigger logic loaded into the board's FPGA.
// Inputs arrive from the ECL receivers inverted (a positive ECL edge gives
// a falling TTL edge, as the paper states), so they are inverted back to
// active-high hits. The isolated cluster number of the 132 hits is
// counted combinationally (no clock between inputs and outputs, as in the
// paper's asynchronous logic) and driven on output bits [3:0]; the other
// used output bits are not given a function by the paper and stay low.
// trig_en, from the CPLD's control register, gates all outputs (the
// paper's stop/start of the trigger output). The pattern register delays
// inputs and outputs by STAGES delay pulses and writes them to the FIFO
// RAM when MTG comes. The delay pulse is one clock in DELAY_DIV clocks of
// the board clock (8 MHz, which is the paper's delay pulse rate, when
// DELAY_DIV = 1). MTG is synchronised and edge-detected here (2 flops + 1).
// With LOGIC = LOGIC_SUM the same board carries the logic of the system's
// summing module instead (icn_sum): the paper's sixth board adds up the
// counts of the five section boards; the ICN of section k is read from
// inputs [4k+3:4k] and the total drives outputs [6:0]. icn then shows
// the total, saturated to four bits.
module fpga_trigger #(
  parameter int unsigned ROWS      = 12,
  parameter int unsigned COLS      = 11,
  parameter int unsigned N_OUT     = 16,
  parameter int unsigned STAGES    = 6,
  parameter int unsigned DELAY_DIV = 1,
  parameter ccm_pkg::fpga_logic_e LOGIC = ccm_pkg::LOGIC_ICN
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [ROWS*COLS-1:0]      trig_n,     // TTL inputs, active low
  output logic [N_OUT-1:0]          occn,       // trigger outputs
  output logic [ccm_pkg::ICN_BITS-1:0]       icn,        // ungated ICN, for monitoring
  input  logic                      trig_en,
  input  logic                      mtg_in,     // master trigger, asynchronous
  input  logic                      rec_en,
  input  logic                      addr_clr,
  output logic [ccm_pkg::WORD_BITS-1:0]      fifo_word,
  output logic                      fifo_word_valid,
  input  logic                      fifo_word_ready,
  output logic                      rec_busy,
  output logic                      rec_dropped,
  output logic                      mtg_pulse
);
  localparam int unsigned N = ROWS * COLS;

  logic [N-1:0] hit;
  logic [N_OUT-1:0] out_raw;

  assign hit = ~trig_n;

  if (LOGIC == ccm_pkg::LOGIC_ICN) begin : g_icn
    logic [N-1:0] counted;   // per-cell decisions, visible for debugging
    icn_counter #(.ROWS(ROWS), .COLS(COLS), .ICN_BITS(ccm_pkg::ICN_BITS)) u_icn (
      .hit, .icn, .counted
    );
    always_comb begin
      out_raw = '0;
      out_raw[ccm_pkg::ICN_BITS-1:0] = icn;
    end
  end else begin : g_sum
    localparam int unsigned N_SEC    = 5;
    localparam int unsigned IB       = ccm_pkg::ICN_BITS;
    localparam int unsigned SUM_BITS = $clog2(N_SEC * ((1 << IB) - 1) + 1);
    logic [SUM_BITS-1:0] total;
    icn_sum #(.N_SEC(N_SEC), .ICN_BITS(IB)) u_sum (
      .icn_in(hit[N_SEC*IB-1:0]), .total
    );
    always_comb begin
      out_raw = '0;
      out_raw[SUM_BITS-1:0] = total;
      icn = (total > SUM_BITS'((1 << IB) - 1)) ? '1 : total[IB-1:0];
    end
  end

  always_comb occn = trig_en ? out_raw : '0;

  // Delay pulse generator
  logic tick;
  if (DELAY_DIV <= 1) begin : g_tick_every
    assign tick = 1'b1;
  end else begin : g_tick_div
    logic [$clog2(DELAY_DIV)-1:0] div;
    always_ff @(posedge clk) begin
      if (rst || div == $clog2(DELAY_DIV)'(DELAY_DIV - 1)) div <= '0;
      else                                                   div <= div + 1'b1;
    end
    assign tick = (div == '0);
  end

  // MTG synchroniser and rising-edge detector
  logic [2:0] mtg_sync;
  always_ff @(posedge clk) begin
    if (rst) mtg_sync <= '0;
    else     mtg_sync <= {mtg_sync[1:0], mtg_in};
  end
  assign mtg_pulse = mtg_sync[1] & ~mtg_sync[2];

  pattern_register #(.N_IN(N), .N_OUT(N_OUT), .STAGES(STAGES),
                     .WORD_BITS(ccm_pkg::WORD_BITS), .WORDS(7)) u_patreg (
    .clk, .rst, .tick, .in_pat(hit), .out_pat(occn), .mtg(mtg_pulse),
    .rec_en, .addr_clr,
    .word(fifo_word), .word_valid(fifo_word_valid), .word_ready(fifo_word_ready),
    .busy(rec_busy), .dropped(rec_dropped)
  );
endmodule
