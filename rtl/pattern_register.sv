// pattern_register: the FPGA half of the board's pattern register.
// The trigger-cell inputs and the trigger outputs run through a delay line
// stepped by the delay pulse (tick), so that they line up with the master
// trigger (MTG) that arrives later. When MTG comes (a one-clock pulse,
// already synchronised) and recording is enabled, the delayed pattern is
// latched into a 168-bit record and sent to the FIFO RAM as WORDS words of
// WORD_BITS bits, one word per accepted valid/ready handshake, lowest word
// first. Record layout (the contents are the paper's, the order this
// design's): [N_IN-1:0] inputs, then N_OUT outputs, 8 reserved bits (zero),
// the 10-bit FIFO address of the record's first word, and 2 unused bits.
// An MTG that comes while a record is still being written is not recorded;
// it pulses 'dropped'. word_valid stays high and word stable until
// word_ready (back-pressure from a full FIFO stalls the record).
module pattern_register #(
  parameter int unsigned N_IN      = 132,
  parameter int unsigned N_OUT     = 16,
  parameter int unsigned STAGES    = 6,
  parameter int unsigned WORD_BITS = 24,
  parameter int unsigned WORDS     = 7
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 tick,        // delay pulse
  input  logic [N_IN-1:0]      in_pat,      // trigger-cell inputs
  input  logic [N_OUT-1:0]     out_pat,     // trigger outputs
  input  logic                 mtg,         // trigger decision, 1-clock pulse
  input  logic                 rec_en,      // recording enabled (CSR)
  input  logic                 addr_clr,    // FIFO was reset: restart addresses
  output logic [WORD_BITS-1:0] word,
  output logic                 word_valid,
  input  logic                 word_ready,
  output logic                 busy,
  output logic                 dropped
);
  localparam int unsigned PW       = N_IN + N_OUT;
  localparam int unsigned REC_BITS = PW + ccm_pkg::RSV_BITS + ccm_pkg::ADDR_BITS + ccm_pkg::PAD_BITS;
  localparam int unsigned IDX_BITS = $clog2(WORDS);

  logic [PW-1:0]                  delayed;
  logic [WORDS*WORD_BITS-1:0]     rec;
  logic [IDX_BITS-1:0]            idx;
  logic [ccm_pkg::ADDR_BITS-1:0]           waddr;    // FIFO word address of the next word

  // Parameter sanity: the record must fit the words
  if (REC_BITS > WORDS * WORD_BITS) begin : g_bad_size
    $error("pattern_register: record does not fit WORDS*WORD_BITS");
  end

  delay_line #(.WIDTH(PW), .STAGES(STAGES)) u_delay (
    .clk, .rst, .tick, .d({out_pat, in_pat}), .q(delayed)
  );

  always_ff @(posedge clk) begin
    dropped <= 1'b0;
    if (rst) begin
      busy  <= 1'b0;
      idx   <= '0;
      rec   <= '0;
      waddr <= '0;
    end else begin
      if (addr_clr) waddr <= '0;
      if (!busy) begin
        if (mtg && rec_en) begin
          busy <= 1'b1;
          idx  <= '0;
          rec  <= '0;
          rec[REC_BITS-1:0] <= {ccm_pkg::PAD_BITS'(0), (addr_clr ? ccm_pkg::ADDR_BITS'(0) : waddr),
                                ccm_pkg::RSV_BITS'(0), delayed};
        end
      end else begin
        if (mtg) dropped <= 1'b1;
        if (word_ready) begin
          waddr <= waddr + 1'b1;
          if (idx == IDX_BITS'(WORDS - 1)) busy <= 1'b0;
          else                            idx  <= idx + 1'b1;
        end
      end
    end
  end

  assign word_valid = busy;
  assign word       = rec[idx*WORD_BITS +: WORD_BITS];

`ifndef SYNTHESIS
  // A presented word must stay put until it is taken
  property p_hold;
    @(posedge clk) disable iff (rst) (word_valid && !word_ready) |=> (word_valid && $stable(word));
  endproperty
  a_hold: assert property (p_hold);
`endif
endmodule
