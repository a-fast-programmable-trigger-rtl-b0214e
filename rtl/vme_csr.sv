// vme_csr: control and status register of the board. A write (wr pulse)
// acts bit by bit: CTL_TRIG_STOP / CTL_TRIG_START stop or restart the
// trigger outputs, CTL_CFG_PROM / CTL_CFG_VME start a reconfiguration of
// the FPGA from the PROM or from the VME bus, CTL_FIFO_RST resets the FIFO
// RAM, CTL_MTG_CLR clears the "master trigger seen" flag; CTL_REC_EN and
// CTL_IRQ_EN are level bits that are simply stored. The read value gathers
// the stored bits with the status inputs: FPGA configuration done / busy /
// source, FIFO empty / full, the sticky MTG flag, the sticky
// "MTG lost" flag (a trigger came while a record was still being written,
// cleared together with the MTG flag) and the pending interrupt. The paper lists these
// control and status functions; the bit positions (ccm_pkg), the reset
// values (trigger output stopped, recording and interrupt off) and the
// one-clock pulses are this design's.
// CTL_MOD_RST is the module reset the control software issues over VME
// ("online resetting of the module" in the original description): it
// pulses mod_rst and fifo_rst, returns every stored bit to its reset value
// and ignores the other bits of that write. What it resets outside the
// CSR (trigger logic, FIFO, interrupter; not the VME cycle in progress
// and not the FPGA configuration) is this design's choice.
module vme_csr
  import ccm_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        wr,
  input  logic [31:0] wr_data,
  output logic [31:0] status,
  // control outputs
  output logic        trig_en,
  output logic        rec_en,
  output logic        irq_en,
  output logic        cfg_prom_start,
  output logic        cfg_vme_start,
  output logic        fifo_rst,
  output logic        mod_rst,
  // status inputs
  input  logic        cfg_done,
  input  logic        cfg_busy,
  input  cfg_src_e    cfg_src,
  input  logic        fifo_empty,
  input  logic        fifo_full,
  input  logic        mtg_pulse,
  input  logic        irq_pending,
  input  logic        mtg_lost        // a trigger came while a record was written
);
  logic mtg_seen, lost_seen;

  always_ff @(posedge clk) begin
    cfg_prom_start <= 1'b0;
    cfg_vme_start  <= 1'b0;
    fifo_rst       <= 1'b0;
    mod_rst        <= 1'b0;
    if (rst) begin
      trig_en  <= 1'b0;
      rec_en   <= 1'b0;
      irq_en   <= 1'b0;
      mtg_seen <= 1'b0;
      lost_seen <= 1'b0;
    end else begin
      if (mtg_pulse) mtg_seen <= 1'b1;
      if (mtg_lost)  lost_seen <= 1'b1;
      if (wr && wr_data[CTL_MOD_RST]) begin
        mod_rst   <= 1'b1;
        fifo_rst  <= 1'b1;
        trig_en   <= 1'b0;
        rec_en    <= 1'b0;
        irq_en    <= 1'b0;
        mtg_seen  <= 1'b0;
        lost_seen <= 1'b0;
      end else if (wr) begin
        if (wr_data[CTL_TRIG_STOP])       trig_en <= 1'b0;
        else if (wr_data[CTL_TRIG_START]) trig_en <= 1'b1;
        cfg_prom_start <= wr_data[CTL_CFG_PROM];
        cfg_vme_start  <= wr_data[CTL_CFG_VME] & ~wr_data[CTL_CFG_PROM];
        fifo_rst       <= wr_data[CTL_FIFO_RST];
        rec_en         <= wr_data[CTL_REC_EN];
        irq_en         <= wr_data[CTL_IRQ_EN];
        if (wr_data[CTL_MTG_CLR] && !mtg_pulse) mtg_seen  <= 1'b0;
        if (wr_data[CTL_MTG_CLR] && !mtg_lost)  lost_seen <= 1'b0;
      end
    end
  end

  always_comb begin
    status                = '0;
    status[ST_TRIG_ON]    = trig_en;
    status[ST_CFG_DONE]   = cfg_done;
    status[ST_CFG_BUSY]   = cfg_busy;
    status[ST_FIFO_EMPTY] = fifo_empty;
    status[ST_FIFO_FULL]  = fifo_full;
    status[ST_REC_EN]     = rec_en;
    status[ST_IRQ_EN]     = irq_en;
    status[ST_MTG_SEEN]   = mtg_seen;
    status[ST_CFG_VME]    = (cfg_src == CFG_SRC_VME);
    status[ST_IRQ_PEND]   = irq_pending;
    status[ST_MTG_LOST]   = lost_seen;
  end
endmodule
