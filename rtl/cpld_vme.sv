// cpld_vme: the board's CPLD, a VME A24/D32 slave built from the address
// decoder, the cycle control, the control/status register, the
// interrupter, the FPGA configuration control and the FIFO RAM control,
// as the paper lists them. Register map (byte offsets in the board's
// 64 KiB window, 32-bit accesses only):
//   0x00 CSR   write: control pulses/levels, read: status (see ccm_pkg)
//   0x04 FIFO  read: next 24-bit pattern-register word in D[23:0];
//              D[31] = 1 and D[23:0] = 0 when the FIFO was empty
//   0x08 CFG   write: FPGA configuration byte D[7:0] (VME mode); reads 0
//   0x0C IRQ   read/write: interrupt vector D[7:0], level D[10:8]
// Any other offset, or a non-32-bit access, ends with BERR*. An interrupt
// is requested after each stored record when enabled. The CPLD runs on
// the board clock. A module reset written to the CSR (bit 8) resets the
// FIFO and the interrupter here and is passed out as mod_rst to reset the
// FPGA's trigger logic; the VME cycle that carries it completes normally. The block list is the paper's; the map, the bit
// assignments and the interrupt source are this design's.
module cpld_vme
  import ccm_pkg::*;
#(
  parameter int unsigned PROG_CLOCKS = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  // VME bus
  input  logic [23:1]          vme_addr,
  input  logic [5:0]           vme_am,
  input  logic                 vme_as_n,
  input  logic [1:0]           vme_ds_n,
  input  logic                 vme_lword_n,
  input  logic                 vme_write_n,
  input  logic                 vme_iack_n,
  input  logic                 vme_iackin_n,
  output logic                 vme_iackout_n,
  input  logic [31:0]          vme_data_in,
  output logic [31:0]          vme_data_out,
  output logic                 vme_data_oe,
  output logic                 vme_dtack_n,
  output logic                 vme_berr_n,
  output logic [7:1]           vme_irq_n,
  input  logic [7:0]           base_sw,
  // to / from the FPGA trigger logic
  output logic                 trig_en,
  output logic                 rec_en,
  output logic                 addr_clr,
  output logic                 mod_rst,     // module reset command
  input  logic [WORD_BITS-1:0] rec_word,
  input  logic                 rec_word_valid,
  output logic                 rec_word_ready,
  input  logic                 rec_busy,
  input  logic                 mtg_pulse,
  input  logic                 rec_dropped,
  // FPGA configuration pins and PROM control
  output logic                 fpga_program_n,
  output logic [2:0]           fpga_mode,
  output logic                 prom_ce_n,
  output logic [7:0]           cfg_d,
  output logic                 cfg_ws_n,
  input  logic                 cfg_rdy,
  input  logic                 fpga_done,
  // FIFO RAM chips
  output logic [WORD_BITS-1:0] fifo_d,
  output logic                 fifo_w_n,
  output logic                 fifo_r_n,
  output logic                 fifo_rs_n,
  input  logic [WORD_BITS-1:0] fifo_q,
  input  logic                 fifo_ef_n,
  input  logic                 fifo_ff_n
);
  logic        sel, reg_ok, d32;
  reg_e        reg_idx, rd_idx;
  logic        reg_rd, reg_wr, rd_ack, local_ack;
  logic [31:0] wr_data, rd_data, status, fifo_rd_data;
  logic        iack_hit, iack_done, irq_en, irq_pending;
  logic [7:0]  irq_vector;
  logic [2:0]  irq_level;
  logic        cfg_prom_start, cfg_vme_start, fifo_rst, cfg_busy, cfg_done;
  logic        irq_rst;
  cfg_src_e    cfg_src;
  logic        fifo_empty, fifo_full, fifo_rd_ack, rec_busy_q, rec_done;

  vme_addr_decoder u_dec (
    .addr(vme_addr), .am(vme_am), .iack_n(vme_iack_n), .lword_n(vme_lword_n),
    .ds_n(vme_ds_n), .base_sw, .sel, .reg_idx, .reg_ok, .d32
  );

  vme_control u_ctl (
    .clk, .rst, .as_n(vme_as_n), .ds_n(vme_ds_n), .write_n(vme_write_n),
    .data_in(vme_data_in), .data_out(vme_data_out), .data_oe(vme_data_oe),
    .dtack_n(vme_dtack_n), .berr_n(vme_berr_n), .sel, .reg_ok, .d32,
    .reg_rd, .reg_wr, .wr_data, .rd_data, .rd_ack,
    .iack_hit, .iack_vector(irq_vector), .iack_done
  );

  vme_csr u_csr (
    .clk, .rst, .wr(reg_wr && reg_idx == REG_CSR), .wr_data, .status,
    .trig_en, .rec_en, .irq_en, .cfg_prom_start, .cfg_vme_start, .fifo_rst, .mod_rst,
    .cfg_done, .cfg_busy, .cfg_src, .fifo_empty, .fifo_full, .mtg_pulse, .irq_pending, .mtg_lost(rec_dropped)
  );

  // A record is complete when the pattern register stops being busy
  always_ff @(posedge clk) rec_busy_q <= rst ? 1'b0 : rec_busy;
  assign rec_done = rec_busy_q & ~rec_busy;

  // The module reset also drops a pending interrupt request
  assign irq_rst = rst | mod_rst;

  vme_interrupter u_irq (
    .clk, .rst(irq_rst), .irq_en, .event_in(rec_done), .level(irq_level),
    .as_n(vme_as_n), .iack_n(vme_iack_n), .iackin_n(vme_iackin_n),
    .addr(vme_addr[3:1]), .iack_done, .iack_hit, .irq_n(vme_irq_n),
    .iackout_n(vme_iackout_n), .pending(irq_pending)
  );

  config_ctrl #(.PROG_CLOCKS(PROG_CLOCKS)) u_cfg (
    .clk, .rst, .start_prom(cfg_prom_start), .start_vme(cfg_vme_start),
    .byte_wr(reg_wr && reg_idx == REG_CFG), .byte_in(wr_data[7:0]),
    .program_n(fpga_program_n), .mode(fpga_mode), .prom_ce_n, .cfg_d, .cfg_ws_n,
    .cfg_rdy, .fpga_done, .busy(cfg_busy), .done(cfg_done), .src(cfg_src)
  );

  fifo_ctrl #(.WORD_BITS(WORD_BITS)) u_fifo (
    .clk, .rst, .fifo_rst,
    .word(rec_word), .word_valid(rec_word_valid), .word_ready(rec_word_ready),
    .rd_req(reg_rd && reg_idx == REG_FIFO), .rd_ack(fifo_rd_ack), .rd_data(fifo_rd_data),
    .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q, .fifo_ef_n, .fifo_ff_n,
    .empty(fifo_empty), .full(fifo_full)
  );
  assign addr_clr = fifo_rst;

  // Interrupt register and read multiplexer
  always_ff @(posedge clk) begin
    if (rst) begin
      irq_vector <= '0;
      irq_level  <= '0;
      rd_idx     <= REG_CSR;
      local_ack  <= 1'b0;
    end else begin
      if (reg_wr && reg_idx == REG_IRQ) begin
        irq_vector <= wr_data[7:0];
        irq_level  <= wr_data[10:8];
      end
      if (reg_rd) rd_idx <= reg_idx;
      local_ack <= reg_rd && reg_idx != REG_FIFO;
    end
  end

  always_comb begin
    unique case (rd_idx)
      REG_CSR:  rd_data = status;
      REG_FIFO: rd_data = fifo_rd_data;
      REG_IRQ:  rd_data = {21'h0, irq_level, irq_vector};
      default:  rd_data = '0;
    endcase
  end
  assign rd_ack = local_ack | fifo_rd_ack;
endmodule
