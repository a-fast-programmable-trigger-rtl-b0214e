// ccm_system_tb: the calorimeter cluster-count trigger as it is deployed,
// five section boards and one summing board on a shared VME bus, every
// board at its default size. Section board k (k = 0..4) counts the
// isolated clusters of its own 132 trigger cells. Its four ICN outputs are
// wired to inputs [4k+3:4k] of the summing board, whose FPGA holds the
// summing logic (LOGIC = LOGIC_SUM). As on the real crate, outputs travel
// through ECL drivers and receivers, so they arrive inverted at the next
// board's FPGA. The summing board puts the total cluster count on its
// outputs [6:0].
//
// The bench drives random hit maps into the five section boards, mostly at
// low occupancy with some dense maps that saturate a section. For every
// event it checks each section's ICN and the summing board's total, 1 ns
// after the inputs change; the path through two boards is combinational.
// Every tenth event a master trigger goes to all six boards at once. The
// host then reads each board's 7-word pattern record over VME and compares
// it with the expected record. The summing board's record thus holds the
// five section counts as inputs and the total as outputs.
//
// The boards' base-address switches are 0x20..0x25. The bus lines DTACK*
// and BERR* are wired-AND, and the read data comes from whichever board
// drives it.
module ccm_system_tb;
  import ccm_pkg::*;
  localparam int R = 12, C = 11, N = R * C, NB = 6, NSEC = 5, EVENTS = 200;

  logic sysclk = 0, ext_clk = 0, reset_n, mtg;
  logic [NB-1:0] mclk_b;
  logic [N-1:0]  trig_n_b [NB];
  logic [15:0]   occn_b   [NB];
  logic [31:0]   data_out_b [NB];
  logic [NB-1:0] oe_b, dtack_b, berr_b;

  logic [23:1] addr; logic [5:0] am; logic as_n, lword_n, write_n, iack_n, iackin_n;
  logic [1:0] ds_n; logic [31:0] data_m, data_rd;
  logic dtack_n, berr_n;
  int checks = 0, failures = 0;
  int n_events = 0, n_sat_section = 0, n_records = 0, n_total_max = 0;

  always_comb begin
    data_rd = '0;
    for (int b = 0; b < NB; b++) if (oe_b[b]) data_rd |= data_out_b[b];
  end
  assign dtack_n = &dtack_b;
  assign berr_n  = &berr_b;

  // section outputs -> summing board inputs, inverted by the ECL link
  always_comb begin
    trig_n_b[NSEC] = '1;
    for (int k = 0; k < NSEC; k++) trig_n_b[NSEC][4*k +: 4] = ~occn_b[k][3:0];
  end

  for (genvar b = 0; b < NB; b++) begin : g_board
    logic [WORD_BITS-1:0] fifo_d, fifo_q;
    logic fifo_w_n, fifo_r_n, fifo_rs_n, prom_ce_n, cfg_ws_n, program_n, iackout_n;
    logic [2:0] ef_n, ff_n, mode;
    logic [7:0] cfg_d;
    logic [7:1] irq_n;
    logic mtg_led;
    ccm_board #(.LOGIC(b == NSEC ? LOGIC_SUM : LOGIC_ICN)) u_board (
      .sysclk, .ext_clk, .clk_sel(1'b0), .reset_n, .mclk(mclk_b[b]), .trig_n(trig_n_b[b]),
      .occn(occn_b[b]), .mtg, .mtg_led,
      .vme_addr(addr), .vme_am(am), .vme_as_n(as_n), .vme_ds_n(ds_n), .vme_lword_n(lword_n),
      .vme_write_n(write_n), .vme_iack_n(iack_n), .vme_iackin_n(iackin_n), .vme_iackout_n(iackout_n),
      .vme_data_in(data_m), .vme_data_out(data_out_b[b]), .vme_data_oe(oe_b[b]),
      .vme_dtack_n(dtack_b[b]), .vme_berr_n(berr_b[b]), .vme_irq_n(irq_n), .base_sw(8'(8'h20 + b)),
      .fpga_program_n(program_n), .fpga_mode(mode), .prom_ce_n, .cfg_d, .cfg_ws_n,
      .cfg_rdy(1'b1), .fpga_done(1'b1),
      .fifo_d, .fifo_w_n, .fifo_r_n, .fifo_rs_n, .fifo_q, .fifo_ef_n(ef_n[0]), .fifo_ff_n(ff_n[0])
    );
    for (genvar k = 0; k < 3; k++) begin : g_chip
      logic [8:0] q9;
      idt7202_model u_chip (.d({1'b0, fifo_d[8*k +: 8]}), .q(q9), .w_n(fifo_w_n), .r_n(fifo_r_n),
        .rs_n(fifo_rs_n), .ef_n(ef_n[k]), .ff_n(ff_n[k]));
      assign fifo_q[8*k +: 8] = q9[7:0];
    end
  end

  vme_master_bfm bfm (.clk(mclk_b[0]), .addr, .am, .as_n, .ds_n, .lword_n, .write_n, .iack_n, .iackin_n,
    .data(data_m), .data_rd, .dtack_n, .berr_n);

  always #31 sysclk = ~sysclk;     // 16 MHz VME SYSCLK -> 8 MHz board clock
  always #50 ext_clk = ~ext_clk;

  function automatic bit at(input logic [N-1:0] h, input int r, input int c);
    if (r < 0 || r >= R || c < 0 || c >= C) return 0;
    return h[r*C + c];
  endfunction
  function automatic int ref_icn(input logic [N-1:0] h);
    int n;
    n = 0;
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
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (600000) @(posedge sysclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v; bit berr; int clocks;
    logic [N-1:0] h [NB];
    int icn [NSEC];
    int total, n_mtg;
    logic [167:0] exp_rec, got;
    void'($urandom(77));
    reset_n = 1; mtg = 0;
    for (int b = 0; b < NSEC; b++) trig_n_b[b] = '1;
    #5 reset_n = 0;
    #1000 reset_n = 1;
    repeat (5) @(posedge mclk_b[0]);
    for (int b = 0; b < NB; b++) begin
      bfm.write32({8'(8'h20 + b), 16'h0000}, 32'h1 << CTL_TRIG_START | 32'h1 << CTL_REC_EN, berr, clocks);
      chk(!berr, "CSR write");
      bfm.read32({8'(8'h20 + b), 16'h0000}, v, berr, clocks);
      chk(!berr && v[ST_TRIG_ON] && v[ST_REC_EN], $sformatf("board %0d started", b));
    end
    n_mtg = 0;
    for (int e = 0; e < EVENTS; e++) begin
      total = 0;
      for (int k = 0; k < NSEC; k++) begin
        h[k] = rand_hits((e % 10 == 7 && k == e % NSEC) ? 40 : 4);
        trig_n_b[k] = ~h[k];
      end
      #1;
      for (int k = 0; k < NSEC; k++) begin
        icn[k] = ref_icn(h[k]);
        total += icn[k];
        chk(occn_b[k] == 16'(icn[k]), $sformatf("event %0d section %0d: occn %0d expected %0d", e, k, occn_b[k], icn[k]));
        if (icn[k] == 15) n_sat_section++;
      end
      chk(occn_b[NSEC] == 16'(total), $sformatf("event %0d: total %0d expected %0d", e, occn_b[NSEC], total));
      if (total > n_total_max) n_total_max = total;
      n_events++;
      if (e % 10 == 7) begin
        // hold the pattern through the delay line, then trigger all boards
        repeat (12) @(posedge mclk_b[0]);
        #13 mtg = 1;
        repeat (3) @(posedge mclk_b[0]);
        #7 mtg = 0;
        repeat (20) @(posedge mclk_b[0]);
        h[NSEC] = ~trig_n_b[NSEC];
        for (int b = 0; b < NB; b++) begin
          exp_rec = '0;
          exp_rec[131:0]   = h[b];
          exp_rec[147:132] = occn_b[b];
          exp_rec[165:156] = 10'(7 * n_mtg);
          for (int w = 0; w < 7; w++) begin
            bfm.read32({8'(8'h20 + b), 16'h0004}, v, berr, clocks);
            chk(!berr && !v[31], "record word present");
            got[24*w +: 24] = v[23:0];
          end
          chk(got == exp_rec, $sformatf("board %0d record %0d: got %h expected %h", b, n_mtg, got, exp_rec));
          if (got == exp_rec) n_records++;
        end
        n_mtg++;
      end
    end
    chk(n_sat_section > 0, "a section saturated");
    chk(n_records == NB * n_mtg && n_mtg > 0, "records from every board");
    $display("events=%0d triggers=%0d records=%0d saturated_sections=%0d largest_total=%0d",
             n_events, n_mtg, n_records, n_sat_section, n_total_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
