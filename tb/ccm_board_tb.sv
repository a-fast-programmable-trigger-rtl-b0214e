// ccm_board_tb: end-to-end test of the whole board at its default size
// (132 trigger cells as 12 x 11, 16 outputs, 6-stage delay, 1024-word
// FIFO of three chip models), driven only through its pins: trigger-cell
// inputs, the master trigger, the clocks and a VME bus master. It runs the
// board as a host would: start the trigger output, enable recording and
// interrupts, then for each event apply a cell pattern, check the ICN on
// the outputs (combinational, checked 1 ns after the input change), send
// MTG, take the interrupt, acknowledge it and read the 7-word record back
// over VME, comparing inputs, outputs, reserved bits and word address
// with a reference. Each mechanism is made to happen and counted:
// trigger output stopped, ICN saturation, pattern delay (a pattern
// changed at MTG time is recorded as it was before), MTG dropped while a
// record is written, FIFO full back-pressure and drain, empty-FIFO read,
// interrupt acknowledge, bus error, FIFO reset, FPGA reconfiguration from
// the PROM and over VME, module reset over VME, and the switch to the
// external clock. A
// mechanism that never happened counts as a failure.
module ccm_board_tb;
  import ccm_pkg::*;
  localparam int R = 12, C = 11, N = R * C;
  localparam logic [7:0] BASE = 8'h3C;
  localparam logic [23:0] CSR = {BASE, 16'h0000}, FIFO = {BASE, 16'h0004},
                          CFG = {BASE, 16'h0008}, IRQ = {BASE, 16'h000C};

  logic sysclk = 0, ext_clk = 0, clk_sel, reset_n, mclk, mtg, mtg_led;
  logic [N-1:0] trig_n;
  logic [15:0] occn;
  logic [23:1] addr; logic [5:0] am; logic as_n, lword_n, write_n, iack_n, iackin_n, iackout_n;
  logic [1:0] ds_n; logic [31:0] data_m, data_out; logic data_oe, dtack_n, berr_n;
  logic [7:1] irq_n;
  logic fpga_program_n, prom_ce_n, cfg_ws_n, cfg_rdy, fpga_done;
  logic [2:0] fpga_mode; logic [7:0] cfg_d;
  logic [23:0] fifo_d, fifo_q; logic fifo_w_n, fifo_r_n, fifo_rs_n;
  logic [2:0] ef_n, ff_n;
  int checks = 0, failures = 0;

  ccm_board dut (
    .sysclk, .ext_clk, .clk_sel, .reset_n, .mclk, .trig_n, .occn, .mtg, .mtg_led,
    .vme_addr(addr), .vme_am(am), .vme_as_n(as_n), .vme_ds_n(ds_n), .vme_lword_n(lword_n),
    .vme_write_n(write_n), .vme_iack_n(iack_n), .vme_iackin_n(iackin_n), .vme_iackout_n(iackout_n),
    .vme_data_in(data_m), .vme_data_out(data_out), .vme_data_oe(data_oe), .vme_dtack_n(dtack_n),
    .vme_berr_n(berr_n), .vme_irq_n(irq_n), .base_sw(BASE),
    .fpga_program_n, .fpga_mode, .prom_ce_n, .cfg_d, .cfg_ws_n, .cfg_rdy, .fpga_done,
    .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q, .fifo_ef_n(ef_n[0]), .fifo_ff_n(ff_n[0])
  );

  vme_master_bfm bfm (.clk(mclk), .addr, .am, .as_n, .ds_n, .lword_n, .write_n, .iack_n, .iackin_n,
    .data(data_m), .data_rd(data_out), .dtack_n, .berr_n);

  for (genvar k = 0; k < 3; k++) begin : g_chip
    logic [8:0] q9;
    idt7202_model u_chip (.d({1'b0, fifo_d[8*k +: 8]}), .q(q9), .w_n(fifo_w_n), .r_n(fifo_r_n),
      .rs_n(fifo_rs_n), .ef_n(ef_n[k]), .ff_n(ff_n[k]));
    assign fifo_q[8*k +: 8] = q9[7:0];
  end

  always #31 sysclk = ~sysclk;     // 16 MHz VME SYSCLK -> 8 MHz board clock
  always #50 ext_clk = ~ext_clk;   // 10 MHz external clock

  // FPGA configuration model
  logic [7:0] cfg_bytes [$];
  int prom_clk = 0;
  always @(posedge mclk) begin
    cfg_rdy <= 1'b1;
    if (!fpga_program_n && reset_n) begin fpga_done <= 0; prom_clk = 0; end
    else if (!fpga_done) begin
      if (!prom_ce_n) begin prom_clk++; if (prom_clk == 10) fpga_done <= 1; end
      if (!cfg_ws_n) begin cfg_bytes.push_back(cfg_d); if (cfg_bytes.size() == 8) fpga_done <= 1; end
    end
  end

  // mechanism counters
  int n_gated = 0, n_sat = 0, n_records = 0, n_delay_old = 0, n_delay_new = 0, n_dropped = 0,
      n_full = 0, n_empty_read = 0, n_iack = 0, n_berr = 0, n_fifo_rst = 0, n_cfg_prom = 0,
      n_cfg_vme = 0, n_ext_clk = 0, n_mod_rst = 0;

  function automatic bit at(input logic [N-1:0] h, input int r, input int c);
    if (r < 0 || r >= R || c < 0 || c >= C) return 0;
    return h[r*C + c];
  endfunction
  function automatic int ref_icn(input logic [N-1:0] h);
    int n = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (at(h,r,c) && !at(h,r-1,c) && !at(h,r,c+1) && !(at(h,r+1,c) && at(h,r+1,c+1))) n++;
    return n > 15 ? 15 : n;
  endfunction

  function automatic logic [N-1:0] rand_hits(input int percent);
    logic [N-1:0] h;
    for (int i = 0; i < N; i++) h[i] = ($urandom_range(0, 99) < percent);
    return h;
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [167:0] exp_recs [$];
  int words_written = 0;
  bit trig_on = 0;

  // apply a hit pattern and check the outputs right away
  task automatic apply(input logic [N-1:0] h);
    trig_n = ~h;
    #1;
    if (trig_on) begin
      chk(occn == 16'(ref_icn(h)), $sformatf("occn %0d expected %0d", occn, ref_icn(h)));
      if (ref_icn(h) == 15) n_sat++;
    end else begin
      chk(occn == 16'h0, "outputs stopped");
      n_gated++;
    end
  endtask

  function automatic logic [167:0] make_rec(input logic [N-1:0] h);
    logic [167:0] rec;
    rec = '0;
    rec[131:0]   = h;
    rec[147:132] = trig_on ? 16'(ref_icn(h)) : 16'h0;
    rec[165:156] = 10'(words_written);
    return rec;
  endfunction

  task automatic send_mtg();
    #13 mtg = 1;
    repeat (3) @(posedge mclk);
    #7 mtg = 0;
  endtask

  // one event; mode 0: steady pattern, 1: pattern changed at MTG (old one
  // recorded), 2: pattern changed 10 clocks before MTG (new one recorded)
  task automatic event_run(input int mode, input int percent);
    logic [N-1:0] a, b;
    a = rand_hits(percent);
    b = rand_hits(percent);
    apply(a);
    repeat (12) @(posedge mclk);
    if (mode == 2) begin
      apply(b);
      repeat (10) @(posedge mclk);
      exp_recs.push_back(make_rec(b));
      n_delay_new++;
    end else begin
      exp_recs.push_back(make_rec(a));
      if (mode == 1) begin apply(b); n_delay_old++; end
    end
    words_written += 7;
    send_mtg();
    repeat (20) @(posedge mclk);
  endtask

  task automatic read_record(output logic [167:0] rec);
    logic [31:0] v; bit berr; int clocks;
    for (int k = 0; k < 7; k++) begin
      bfm.read32(FIFO, v, berr, clocks);
      chk(!berr && !v[31], "FIFO word present");
      rec[24*k +: 24] = v[23:0];
    end
  endtask

  task automatic check_records();
    logic [167:0] got, e;
    while (exp_recs.size() > 0) begin
      e = exp_recs.pop_front();
      read_record(got);
      chk(got == e, $sformatf("record %0d: got %h expected %h", n_records, got, e));
      n_records++;
    end
  endtask

  initial begin
    repeat (400000) @(posedge sysclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v; bit berr, ok; int clocks; logic [7:0] vec;
    clk_sel = 0; reset_n = 1; mtg = 0; trig_n = '1; fpga_done = 1; cfg_rdy = 1;
    #5 reset_n = 0;
    #1000 reset_n = 1;
    repeat (5) @(posedge mclk);
    // outputs stopped after reset
    apply(rand_hits(5));
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_TRIG_ON] && v[ST_FIFO_EMPTY] && v[ST_CFG_DONE], $sformatf("reset status %h", v));
    // host setup
    bfm.write32(IRQ, 32'h0000_0342, berr, clocks);
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN | 32'h1 << CTL_IRQ_EN, berr, clocks);
    trig_on = 1;
    // events read back one by one through the interrupt
    for (int e = 0; e < 12; e++) begin
      event_run(e % 3, (e % 4 == 3) ? 40 : 5);
      chk(irq_n == 7'b111_1011, $sformatf("IRQ3 asserted (%b)", irq_n));
      bfm.iack(3'd3, vec, ok);
      chk(ok && vec == 8'h42, "acknowledge vector");
      if (ok) n_iack++;
      check_records();
    end
    bfm.read32(FIFO, v, berr, clocks);
    chk(v == 32'h8000_0000, "empty FIFO read");
    if (v == 32'h8000_0000) n_empty_read++;
    // MTG while a record is being written: only one record
    apply(rand_hits(5));
    repeat (12) @(posedge mclk);
    exp_recs.push_back(make_rec(~trig_n));
    words_written += 7;
    send_mtg();
    repeat (2) @(posedge mclk);
    send_mtg();
    repeat (30) @(posedge mclk);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_MTG_LOST], "lost trigger flagged");
    if (v[ST_MTG_LOST]) n_dropped++;
    bfm.iack(3'd3, vec, ok);
    check_records();
    bfm.read32(FIFO, v, berr, clocks);
    chk(v == 32'h8000_0000, "second MTG not recorded");
    // fill the FIFO without reading (interrupts off): 146 records fit,
    // the 147th stalls after 2 words until the host reads
    bfm.write32(CSR, 32'h1 << CTL_TRIG_STOP | 32'h1 << CTL_REC_EN, berr, clocks);
    trig_on = 0;
    begin
      logic [N-1:0] h;
      for (int e = 0; e < 147; e++) begin
        h = rand_hits(4);
        apply(h);
        repeat (9) @(posedge mclk);
        exp_recs.push_back(make_rec(h));
        words_written += 7;
        send_mtg();
        repeat (16) @(posedge mclk);
      end
    end
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_FIFO_FULL], "FIFO full");
    if (v[ST_FIFO_FULL]) n_full++;
    check_records();
    bfm.read32(FIFO, v, berr, clocks);
    chk(v == 32'h8000_0000, "FIFO empty after draining");
    // bus error and trigger stop
    bfm.read32({BASE, 16'h0100}, v, berr, clocks);
    chk(berr, "BERR* on unused offset");
    if (berr) n_berr++;
    bfm.write32(CSR, 32'h1 << CTL_TRIG_STOP, berr, clocks);
    apply(rand_hits(5));
    // FIFO reset
    bfm.write32(CSR, 32'h1 << CTL_TRIG_STOP | 32'h1 << CTL_REC_EN, berr, clocks);
    apply(rand_hits(5));
    repeat (10) @(posedge mclk);
    send_mtg();
    repeat (20) @(posedge mclk);
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_FIFO_EMPTY], "record present before reset");
    bfm.write32(CSR, 32'h1 << CTL_FIFO_RST | 32'h1 << CTL_REC_EN, berr, clocks);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_FIFO_EMPTY], "FIFO empty after reset");
    if (v[ST_FIFO_EMPTY]) n_fifo_rst++;
    words_written = 0;
    // after the reset the word address starts again at 0
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    trig_on = 1;
    event_run(0, 5);
    check_records();
    // module reset over VME while a record waits and its interrupt is
    // pending: everything returns to the reset state except the FPGA
    // configuration, and the board runs again after a restart
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN | 32'h1 << CTL_IRQ_EN, berr, clocks);
    apply(rand_hits(5));
    repeat (12) @(posedge mclk);
    send_mtg();
    repeat (20) @(posedge mclk);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_IRQ_PEND] && !v[ST_FIFO_EMPTY] && irq_n != 7'h7F, "record and interrupt before module reset");
    bfm.write32(CSR, 32'h1 << CTL_MOD_RST | 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    chk(!berr, "module reset write acknowledged");
    trig_on = 0;
    apply(rand_hits(5));
    bfm.read32(CSR, v, berr, clocks);
    chk(!v[ST_TRIG_ON] && !v[ST_REC_EN] && !v[ST_IRQ_EN] && !v[ST_IRQ_PEND] && !v[ST_MTG_SEEN] &&
        v[ST_FIFO_EMPTY] && v[ST_CFG_DONE] && irq_n == 7'h7F, $sformatf("status after module reset %h", v));
    if (!v[ST_TRIG_ON] && v[ST_FIFO_EMPTY] && !v[ST_IRQ_PEND]) n_mod_rst++;
    words_written = 0;
    bfm.write32(CSR, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    trig_on = 1;
    event_run(2, 5);
    check_records();
    // reconfiguration from the PROM and over VME
    bfm.write32(CSR, 32'h1 << CTL_CFG_PROM | 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
    repeat (30) @(posedge mclk);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_CFG_DONE] && !v[ST_CFG_BUSY] && !v[ST_CFG_VME] && prom_clk == 10, "PROM configuration");
    if (v[ST_CFG_DONE] && prom_clk == 10) n_cfg_prom++;
    cfg_bytes.delete();
    bfm.write32(CSR, 32'h1 << CTL_CFG_VME | 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN | 32'h1 << CTL_IRQ_EN, berr, clocks);
    repeat (8) @(posedge mclk);
    for (int b = 0; b < 8; b++) bfm.write32(CFG, 32'(8'hA0 + b), berr, clocks);
    repeat (4) @(posedge mclk);
    bfm.read32(CSR, v, berr, clocks);
    chk(v[ST_CFG_DONE] && v[ST_CFG_VME] && cfg_bytes.size() == 8, "VME configuration");
    foreach (cfg_bytes[i]) chk(cfg_bytes[i] == 8'(8'hA0 + i), "configuration byte");
    if (v[ST_CFG_DONE] && cfg_bytes.size() == 8) n_cfg_vme++;
    // external clock
    clk_sel = 1;
    repeat (20) @(posedge ext_clk);
    begin
      int nm = 0, ne = 0;
      fork
        repeat (50) @(posedge ext_clk) ne++;
        forever @(posedge mclk) nm++;
      join_any
      disable fork;
      chk(nm >= 49 && nm <= 51, $sformatf("board clock follows external clock (%0d/%0d)", nm, ne));
      if (nm >= 49 && nm <= 51) n_ext_clk++;
    end
    event_run(1, 5);
    bfm.iack(3'd3, vec, ok);
    check_records();
    // coverage of the mechanisms
    chk(n_gated > 0, "trigger stop");
    chk(n_sat > 0, "ICN saturation");
    chk(n_records > 150, "records");
    chk(n_delay_old > 0 && n_delay_new > 0, "pattern delay");
    chk(n_dropped > 0, "MTG dropped while busy");
    chk(n_full > 0, "FIFO full");
    chk(n_empty_read > 0, "empty read");
    chk(n_iack > 0, "interrupt acknowledge");
    chk(n_berr > 0, "bus error");
    chk(n_fifo_rst > 0, "FIFO reset");
    chk(n_cfg_prom > 0 && n_cfg_vme > 0, "reconfiguration");
    chk(n_ext_clk > 0, "external clock");
    chk(n_mod_rst > 0, "module reset");
    $display("mechanisms: stopped=%0d saturated=%0d records=%0d delay_old=%0d delay_new=%0d dropped=%0d full=%0d empty_read=%0d iack=%0d berr=%0d fifo_reset=%0d cfg_prom=%0d cfg_vme=%0d ext_clk=%0d mod_rst=%0d",
             n_gated, n_sat, n_records, n_delay_old, n_delay_new, n_dropped, n_full, n_empty_read,
             n_iack, n_berr, n_fifo_rst, n_cfg_prom, n_cfg_vme, n_ext_clk, n_mod_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
