// config_ctrl_tb: the configuration control is connected to a simple FPGA
// model that clears DONE on PROGRAM*, then either loads itself from the
// PROM (DONE rises 20 clocks after the PROM is enabled) or takes bytes on
// WS* while it says ready (RDY toggles at random) and raises DONE after
// 16 bytes. Checks: PROGRAM* low for exactly PROG_CLOCKS clocks, the mode
// pins (master serial 000 / peripheral asynchronous 101), PROM enable only
// in PROM mode, every configuration byte delivered once and in order, no
// strobe while the FPGA is busy, busy until DONE, and the source flag.
module config_ctrl_tb;
  import ccm_pkg::*;
  localparam int PC = 4, NBYTES = 16;
  logic clk = 0, rst, start_prom, start_vme, byte_wr;
  logic [7:0] byte_in, cfg_d;
  logic program_n, prom_ce_n, cfg_ws_n, cfg_rdy, fpga_done, busy, done;
  logic [2:0] mode;
  cfg_src_e src;
  int checks = 0, failures = 0;

  config_ctrl #(.PROG_CLOCKS(PC)) dut (.clk, .rst, .start_prom, .start_vme, .byte_wr, .byte_in,
    .program_n, .mode, .prom_ce_n, .cfg_d, .cfg_ws_n, .cfg_rdy, .fpga_done, .busy, .done, .src);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // FPGA model
  int prog_low = 0, last_prog_low = 0, prom_clocks = 0, got = 0;
  logic [7:0] got_bytes [$];
  logic rdy_q;   // RDY as the controller saw it one edge earlier
  always @(posedge clk) begin
    rdy_q   <= cfg_rdy;
    cfg_rdy <= ($urandom_range(0, 2) != 0);
    if (!program_n) begin
      prog_low++; fpga_done <= 0; prom_clocks = 0; got = 0;
    end else begin
      if (prog_low != 0) begin last_prog_low = prog_low; prog_low = 0; end
      if (!prom_ce_n) begin
        prom_clocks++;
        if (prom_clocks == 20) fpga_done <= 1;
      end
      if (!cfg_ws_n) begin
        if (!rdy_q) begin failures++; $display("FAIL strobe while busy"); end
        got_bytes.push_back(cfg_d);
        got++;
        if (got == NBYTES) fpga_done <= 1;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sent [$];
    rst = 1; start_prom = 0; start_vme = 0; byte_wr = 0; byte_in = 0; fpga_done = 1; cfg_rdy = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int round = 0; round < 6; round++) begin
      bit vme;
      vme = round[0];
      @(negedge clk);
      if (vme) start_vme = 1; else start_prom = 1;
      @(negedge clk); start_vme = 0; start_prom = 0;
      chk(busy, "busy after start");
      repeat (PC + 2) @(negedge clk);
      chk(last_prog_low == PC, $sformatf("PROGRAM* low %0d clocks", last_prog_low));
      chk(mode == (vme ? 3'b101 : 3'b000), "mode pins");
      chk(src == (vme ? CFG_SRC_VME : CFG_SRC_PROM), "source flag");
      if (vme) begin
        chk(prom_ce_n, "PROM off in VME mode");
        sent.delete(); got_bytes.delete();
        for (int b = 0; b < NBYTES; b++) begin
          logic [7:0] v;
          v = 8'($urandom);
          sent.push_back(v);
          @(negedge clk) begin byte_wr = 1; byte_in = v; end
          @(negedge clk) byte_wr = 0;
          // host polls: wait until the byte has gone out
          while (got_bytes.size() < sent.size()) @(negedge clk);
        end
        repeat (3) @(negedge clk);
        chk(got_bytes.size() == NBYTES, "byte count");
        for (int b = 0; b < NBYTES && b < got_bytes.size(); b++)
          chk(got_bytes[b] == sent[b], "byte order/value");
      end else begin
        chk(!prom_ce_n, "PROM enabled in PROM mode");
        repeat (25) @(negedge clk);
      end
      chk(fpga_done && done && !busy, "done, not busy");
    end
    // a byte written when not configuring is not sent
    got_bytes.delete();
    @(negedge clk) begin byte_wr = 1; byte_in = 8'h5A; end
    @(negedge clk) byte_wr = 0;
    repeat (5) @(negedge clk);
    chk(got_bytes.size() == 0 && cfg_ws_n, "no strobe outside configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
