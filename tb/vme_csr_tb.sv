// vme_csr_tb: writes random control words to the CSR and checks, against
// a reference model of the bit definitions, the trigger-enable flag (stop
// wins over start), the level bits, the one-clock start/reset pulses and
// the sticky MTG flag; random status inputs must appear at their bit
// positions in the read value. The sticky "MTG lost" flag is checked
// the same way as the MTG flag. About one write in eight also carries the
// module-reset bit, which must pulse mod_rst and fifo_rst and clear every
// stored bit whatever else the write holds.
module vme_csr_tb;
  import ccm_pkg::*;
  logic clk = 0, rst, wr;
  logic [31:0] wr_data, status;
  logic trig_en, rec_en, irq_en, cfg_prom_start, cfg_vme_start, fifo_rst, mod_rst;
  logic cfg_done, cfg_busy, fifo_empty, fifo_full, mtg_pulse, irq_pending, mtg_lost;
  cfg_src_e cfg_src;
  int checks = 0, failures = 0;

  vme_csr dut (.clk, .rst, .wr, .wr_data, .status, .trig_en, .rec_en, .irq_en,
               .cfg_prom_start, .cfg_vme_start, .fifo_rst, .mod_rst, .cfg_done, .cfg_busy, .cfg_src,
               .fifo_empty, .fifo_full, .mtg_pulse, .irq_pending, .mtg_lost);

  always #5 clk = ~clk;

  bit m_trig, m_rec, m_irq, m_mtg, m_lost, m_prom, m_vme, m_frst, m_mrst;
  int n_mrst = 0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr = 0; wr_data = '0; mtg_pulse = 0; mtg_lost = 0;
    {cfg_done, cfg_busy, fifo_empty, fifo_full, irq_pending} = '0; cfg_src = CFG_SRC_PROM;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    chk(!trig_en && !rec_en && !irq_en, "reset values");
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      wr = ($urandom_range(0, 2) == 0);
      wr_data = 32'($urandom);
      wr_data[8] = ($urandom_range(0, 7) == 0);   // module reset, now and then
      mtg_pulse = ($urandom_range(0, 9) == 0);
      mtg_lost  = ($urandom_range(0, 19) == 0);
      {cfg_done, cfg_busy, fifo_empty, fifo_full, irq_pending} = 5'($urandom);
      cfg_src = cfg_src_e'($urandom_range(0, 1));
      // reference for this edge
      m_prom = 0; m_vme = 0; m_frst = 0; m_mrst = 0;
      if (mtg_pulse) m_mtg = 1;
      if (mtg_lost) m_lost = 1;
      if (wr && wr_data[8]) begin
        m_mrst = 1; m_frst = 1; n_mrst++;
        m_trig = 0; m_rec = 0; m_irq = 0; m_mtg = 0; m_lost = 0;
      end else if (wr) begin
        if (wr_data[0]) m_trig = 0; else if (wr_data[1]) m_trig = 1;
        m_prom = wr_data[2];
        m_vme  = wr_data[3] && !wr_data[2];
        m_frst = wr_data[4];
        m_rec  = wr_data[5];
        m_irq  = wr_data[6];
        if (wr_data[7] && !mtg_pulse) m_mtg = 0;
        if (wr_data[7] && !mtg_lost) m_lost = 0;
      end
      #1;
      chk(status[3] == fifo_empty && status[4] == fifo_full && status[1] == cfg_done &&
          status[2] == cfg_busy && status[8] == (cfg_src == CFG_SRC_VME) && status[9] == irq_pending,
          "status inputs");
      @(posedge clk); #1;
      chk(trig_en == m_trig && rec_en == m_rec && irq_en == m_irq, "control levels");
      chk(cfg_prom_start == m_prom && cfg_vme_start == m_vme && fifo_rst == m_frst && mod_rst == m_mrst, "control pulses");
      chk(status[10] == m_lost && status[7] == m_mtg && status[0] == m_trig && status[5] == m_rec && status[6] == m_irq, "status of stored bits");
    end
    chk(n_mrst > 0, "module reset exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
