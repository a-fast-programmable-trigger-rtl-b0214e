// cpld_vme_tb: the CPLD's VME slave with three FIFO chip models (depth
// 1024), a simple FPGA configuration model and the testbench standing in
// for the FPGA's pattern register. Through VME cycles only, it checks: the
// CSR reset value and trigger stop/start, recording and interrupt enables,
// BERR* on unused offsets and D16 cycles, silence for another base
// address, FIFO words offered by the "FPGA" reading back in order with the
// empty flag, a FIFO reset, the interrupt after a record (IRQ* line,
// acknowledge vector, release), a module reset (one mod_rst pulse; CSR,
// FIFO and pending interrupt cleared; interrupt register kept), and an FPGA reconfiguration from the PROM
// and one over VME whose bytes reach the configuration pins in order.
module cpld_vme_tb;
  import ccm_pkg::*;
  localparam logic [7:0] BASE = 8'hA4;
  localparam logic [23:0] CSR = {BASE, 16'h0000}, FIFO = {BASE, 16'h0004},
                          CFG = {BASE, 16'h0008}, IRQ = {BASE, 16'h000C};
  logic clk = 0, rst;
  logic [23:1] addr; logic [5:0] am; logic as_n, lword_n, write_n, iack_n, iackin_n, iackout_n;
  logic [1:0] ds_n; logic [31:0] data_m, data_out; logic data_oe, dtack_n, berr_n;
  logic [7:1] irq_n;
  logic trig_en, rec_en, addr_clr, mod_rst, rec_word_valid, rec_word_ready, rec_busy, mtg_pulse, rec_dropped;
  logic [23:0] rec_word, fifo_d, fifo_q;
  logic fpga_program_n, prom_ce_n, cfg_ws_n, cfg_rdy, fpga_done;
  logic [2:0] fpga_mode; logic [7:0] cfg_d;
  logic fifo_w_n, fifo_r_n, fifo_rs_n;
  logic [2:0] ef_n, ff_n;
  int checks = 0, failures = 0;
  int n_mod_rst = 0;
  always @(posedge clk) if (mod_rst) n_mod_rst++;

  cpld_vme dut (.clk, .rst, .vme_addr(addr), .vme_am(am), .vme_as_n(as_n), .vme_ds_n(ds_n),
    .vme_lword_n(lword_n), .vme_write_n(write_n), .vme_iack_n(iack_n), .vme_iackin_n(iackin_n),
    .vme_iackout_n(iackout_n), .vme_data_in(data_m), .vme_data_out(data_out), .vme_data_oe(data_oe),
    .vme_dtack_n(dtack_n), .vme_berr_n(berr_n), .vme_irq_n(irq_n), .base_sw(BASE),
    .trig_en, .rec_en, .addr_clr, .mod_rst, .rec_word, .rec_word_valid, .rec_word_ready, .rec_busy, .mtg_pulse, .rec_dropped,
    .fpga_program_n, .fpga_mode, .prom_ce_n, .cfg_d, .cfg_ws_n, .cfg_rdy, .fpga_done,
    .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q, .fifo_ef_n(ef_n[0]), .fifo_ff_n(ff_n[0]));

  vme_master_bfm bfm (.clk, .addr, .am, .as_n, .ds_n, .lword_n, .write_n, .iack_n, .iackin_n,
    .data(data_m), .data_rd(data_out), .dtack_n, .berr_n);

  for (genvar k = 0; k < 3; k++) begin : g_chip
    logic [8:0] q9;
    idt7202_model u_chip (.d({1'b0, fifo_d[8*k +: 8]}), .q(q9), .w_n(fifo_w_n), .r_n(fifo_r_n),
      .rs_n(fifo_rs_n), .ef_n(ef_n[k]), .ff_n(ff_n[k]));
    assign fifo_q[8*k +: 8] = q9[7:0];
  end

  always #62 clk = ~clk;

  // FPGA configuration model: DONE drops on PROGRAM*, rises after 10 PROM
  // clocks or 8 VME bytes
  logic [7:0] cfg_bytes [$];
  int prom_clk = 0;
  always @(posedge clk) begin
    cfg_rdy <= 1'b1;
    if (!fpga_program_n) begin fpga_done <= 0; prom_clk = 0; end
    else if (!fpga_done) begin
      if (!prom_ce_n) begin prom_clk++; if (prom_clk == 10) fpga_done <= 1; end
      if (!cfg_ws_n) begin cfg_bytes.push_back(cfg_d); if (cfg_bytes.size() == 8) fpga_done <= 1; end
    end
  end

  // pattern register stand-in: send 'n' words as one record
  task automatic send_record(input logic [23:0] w [$]);
    @(negedge clk) rec_busy = 1;
    foreach (w[i]) begin
      rec_word = w[i]; rec_word_valid = 1;
      do @(posedge clk); while (!rec_word_ready);
      @(negedge clk);
    end
    rec_word_valid = 0; rec_busy = 0;
  endtask

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v; bit berr, ok; int clocks; logic [7:0] vec;
    logic [23:0] words [$];
    rst = 1; rec_word_valid = 0; rec_busy = 0; mtg_pulse = 0; rec_dropped = 0; rec_word = '0; fpga_done = 1; cfg_rdy = 1;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (4) @(negedge clk);
    bfm.read32(CSR, v, berr, clocks);
    chk(!berr && v[ST_TRIG_ON] == 0 && v[ST_FIFO_EMPTY] && v[ST_CFG_DONE], $sformatf("reset status %h", v));
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    chk(trig_en && rec_en, "trigger started, recording on");
    bfm.write32(CSR, 32'h1 << CTL_TRIG_STOP | 32'h1 << CTL_REC_EN, berr, clocks);
    chk(!trig_en && rec_en, "trigger stopped");
    bfm.read32({BASE, 16'h0040}, v, berr, clocks);
    chk(berr, "BERR* on unused offset");
    bfm.read16(CSR, v, berr, clocks);
    chk(berr, "BERR* on D16");
    bfm.read32({8'h11, 16'h0}, v, berr, clocks);
    chk(!berr && clocks > 200, "other base address ignored");
    // MTG flag
    @(negedge clk) mtg_pulse = 1; @(negedge clk) mtg_pulse = 0;
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_MTG_SEEN], "MTG seen");
    bfm.write32(CSR, 32'h1 << CTL_MTG_CLR | 32'h1 << CTL_REC_EN, berr, clocks);
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_MTG_SEEN], "MTG flag cleared");
    @(negedge clk) rec_dropped = 1; @(negedge clk) rec_dropped = 0;
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_MTG_LOST], "MTG lost flag");
    // interrupts: level 5, vector 0x9B
    bfm.write32(IRQ, 32'h0000_059B, berr, clocks);
    bfm.read32(IRQ, v, berr, clocks);
    chk(v == 32'h0000_059B, "IRQ register");
    bfm.write32(CSR, 32'h1 << CTL_REC_EN | 32'h1 << CTL_IRQ_EN, berr, clocks);
    // three records of 7 words
    for (int r = 0; r < 3; r++) begin
      logic [23:0] rec [$];
      rec.delete();
      for (int k = 0; k < 7; k++) begin rec.push_back(24'($urandom)); words.push_back(rec[k]); end
      send_record(rec);
    end
    repeat (4) @(negedge clk);
    chk(irq_n == 7'b110_1111, $sformatf("IRQ5 asserted (%b)", irq_n));
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_IRQ_PEND] && !v[ST_FIFO_EMPTY], "status: pending, not empty");
    bfm.iack(3'd5, vec, ok);
    chk(ok && vec == 8'h9B, $sformatf("acknowledge vector %h", vec));
    chk(irq_n == 7'h7F, "IRQ released");
    foreach (words[i]) begin
      bfm.read32(FIFO, v, berr, clocks);
      chk(!berr && v == {8'h00, words[i]}, $sformatf("FIFO word %0d: %h expected %h", i, v, words[i]));
    end
    bfm.read32(FIFO, v, berr, clocks);
    chk(v == 32'h8000_0000, "empty FIFO read");
    // FIFO reset
    words.delete();
    for (int k = 0; k < 5; k++) words.push_back(24'($urandom));
    send_record(words);
    bfm.write32(CSR, 32'h1 << CTL_FIFO_RST, berr, clocks);
    chk(addr_clr == 0, "address clear is a pulse");
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_FIFO_EMPTY], "empty after FIFO reset");
    // module reset with a record stored and its interrupt pending
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN | 32'h1 << CTL_IRQ_EN, berr, clocks);
    words.delete();
    for (int k = 0; k < 7; k++) words.push_back(24'($urandom));
    send_record(words);
    repeat (4) @(negedge clk);
    chk(irq_n != 7'h7F && trig_en, "interrupt pending before module reset");
    n_mod_rst = 0;
    bfm.write32(CSR, 32'h1 << CTL_MOD_RST | 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    chk(!berr, "module reset write acknowledged");
    bfm.read32(CSR, v, berr, clocks);
    chk(n_mod_rst == 1 && !trig_en && !rec_en && irq_n == 7'h7F, "module reset pulse and outputs");
    chk(!v[ST_TRIG_ON] && !v[ST_REC_EN] && !v[ST_IRQ_EN] && !v[ST_IRQ_PEND] && !v[ST_MTG_SEEN] &&
        !v[ST_MTG_LOST] && v[ST_FIFO_EMPTY], $sformatf("status after module reset %h", v));
    bfm.read32(IRQ, v, berr, clocks);
    chk(v == 32'h0000_059B, "IRQ register kept over module reset");
    // reconfiguration from the PROM
    bfm.write32(CSR, 32'h1 << CTL_CFG_PROM, berr, clocks);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_CFG_BUSY] && !v[ST_CFG_DONE] && fpga_mode == 3'b000, "PROM configuration under way");
    repeat (20) @(negedge clk);
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_CFG_BUSY] && v[ST_CFG_DONE] && !v[ST_CFG_VME], "PROM configuration done");
    // reconfiguration over VME
    bfm.write32(CSR, 32'h1 << CTL_CFG_VME, berr, clocks);
    cfg_bytes.delete();
    repeat (8) @(negedge clk);
    chk(fpga_mode == 3'b101 && prom_ce_n, "peripheral mode");
    for (int b = 0; b < 8; b++) bfm.write32(CFG, 32'(8'h30 + b), berr, clocks);
    repeat (4) @(negedge clk);
    chk(cfg_bytes.size() == 8, $sformatf("configuration bytes %0d", cfg_bytes.size()));
    foreach (cfg_bytes[i]) chk(cfg_bytes[i] == 8'(8'h30 + i), "configuration byte order");
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_CFG_BUSY] && v[ST_CFG_DONE] && v[ST_CFG_VME], "VME configuration done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
