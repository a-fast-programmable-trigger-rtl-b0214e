// ccm_board: the Cluster Counting Module, a 9U VME trigger board that
// counts isolated clusters of calorimeter trigger cells. It joins the
// FPGA trigger logic (cluster counting, output gating, pattern register)
// with the CPLD's VME slave and the board clock selection. The ports are
// the TTL-side pins of the on-board parts the board buys rather than
// designs: the ECL receivers (inputs arrive inverted, as on the real
// board), the ECL output drivers, the NIM-TTL converters (MTG and
// external clock), the FIFO RAM chips, the configuration PROM and the
// FPGA's configuration pins. The VME data bus is split into in / out /
// output-enable. Reset (front-panel switch or VME SYSRESET*, active low)
// is synchronised to the board clock. The module reset command of the
// CSR resets the FPGA trigger logic, the FIFO and the interrupter without
// touching the VME slave or the FPGA configuration.
// Trigger path: trig_n -> occn is combinational (no clock in the way).
// Pattern register: inputs and outputs are delayed by STAGES board clocks
// (750 ns at the 8 MHz rate) and stored as 7 FIFO words per MTG.
module ccm_board
  import ccm_pkg::*;
#(
  parameter int unsigned ROWS        = 12,
  parameter int unsigned COLS        = 11,
  parameter int unsigned STAGES      = 6,
  parameter int unsigned DELAY_DIV   = 1,
  parameter int unsigned PROG_CLOCKS = 4,
  parameter fpga_logic_e LOGIC       = LOGIC_ICN
) (
  // clocks and reset
  input  logic                  sysclk,        // VME SYSCLK
  input  logic                  ext_clk,       // external clock (NIM-TTL)
  input  logic                  clk_sel,       // 1: external clock
  input  logic                  reset_n,       // front-panel / SYSRESET*
  output logic                  mclk,
  // trigger inputs and outputs (TTL side of the ECL converters)
  input  logic [ROWS*COLS-1:0]  trig_n,
  output logic [N_OUT-1:0]      occn,
  input  logic                  mtg,           // master trigger (NIM-TTL)
  output logic                  mtg_led,
  // VME bus
  input  logic [23:1]           vme_addr,
  input  logic [5:0]            vme_am,
  input  logic                  vme_as_n,
  input  logic [1:0]            vme_ds_n,
  input  logic                  vme_lword_n,
  input  logic                  vme_write_n,
  input  logic                  vme_iack_n,
  input  logic                  vme_iackin_n,
  output logic                  vme_iackout_n,
  input  logic [31:0]           vme_data_in,
  output logic [31:0]           vme_data_out,
  output logic                  vme_data_oe,
  output logic                  vme_dtack_n,
  output logic                  vme_berr_n,
  output logic [7:1]            vme_irq_n,
  input  logic [7:0]            base_sw,
  // FPGA configuration and PROM
  output logic                  fpga_program_n,
  output logic [2:0]            fpga_mode,
  output logic                  prom_ce_n,
  output logic [7:0]            cfg_d,
  output logic                  cfg_ws_n,
  input  logic                  cfg_rdy,
  input  logic                  fpga_done,
  // FIFO RAM chips (three side by side)
  output logic [WORD_BITS-1:0]  fifo_d,
  output logic                  fifo_w_n,
  output logic                  fifo_r_n,
  output logic                  fifo_rs_n,
  input  logic [WORD_BITS-1:0]  fifo_q,
  input  logic                  fifo_ef_n,
  input  logic                  fifo_ff_n
);
  logic                 rst;
  logic                 mod_rst, fpga_rst;   // module reset from the CSR
  logic [1:0]           rst_sync;
  logic                 trig_en, rec_en, addr_clr;
  logic [WORD_BITS-1:0] rec_word;
  logic                 rec_word_valid, rec_word_ready, rec_busy, rec_dropped, mtg_pulse;

  // The board has 144 inputs and 24 outputs, of which this logic uses
  // ROWS*COLS and N_OUT
  if (ROWS * COLS > N_IN_MAX || N_OUT > N_OUT_MAX) begin : g_bad_size
    $error("ccm_board: more signals than the board's connectors carry");
  end

  clock_select u_clk (.sysclk, .ext_clk, .sel(clk_sel), .mclk);

  always_ff @(posedge mclk or negedge reset_n) begin
    if (!reset_n) rst_sync <= '1;
    else          rst_sync <= {rst_sync[0], 1'b0};
  end
  assign rst = rst_sync[1];
  assign fpga_rst = rst | mod_rst;

  fpga_trigger #(.ROWS(ROWS), .COLS(COLS), .N_OUT(N_OUT), .STAGES(STAGES),
                 .DELAY_DIV(DELAY_DIV), .LOGIC(LOGIC)) u_fpga (
    .clk(mclk), .rst(fpga_rst), .trig_n, .occn, .icn(), .trig_en, .mtg_in(mtg), .rec_en, .addr_clr,
    .fifo_word(rec_word), .fifo_word_valid(rec_word_valid),
    .fifo_word_ready(rec_word_ready), .rec_busy, .rec_dropped, .mtg_pulse
  );

  cpld_vme #(.PROG_CLOCKS(PROG_CLOCKS)) u_cpld (
    .clk(mclk), .rst,
    .vme_addr, .vme_am, .vme_as_n, .vme_ds_n, .vme_lword_n, .vme_write_n,
    .vme_iack_n, .vme_iackin_n, .vme_iackout_n, .vme_data_in, .vme_data_out,
    .vme_data_oe, .vme_dtack_n, .vme_berr_n, .vme_irq_n, .base_sw,
    .trig_en, .rec_en, .addr_clr, .mod_rst, .rec_word, .rec_word_valid, .rec_word_ready,
    .rec_busy, .mtg_pulse, .rec_dropped,
    .fpga_program_n, .fpga_mode, .prom_ce_n, .cfg_d, .cfg_ws_n, .cfg_rdy, .fpga_done,
    .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q, .fifo_ef_n, .fifo_ff_n
  );

  assign mtg_led = mtg;
endmodule
