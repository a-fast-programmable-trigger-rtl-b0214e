// vme_control_tb: a bus-master model runs VME cycles against the cycle
// control. The testbench decodes the board address itself (base 0x5A),
// keeps a four-word register file behind reg_wr / reg_rd and answers reads
// after a random wait. Checks: data written reads back, unused offsets and
// D16 cycles end in BERR* (never DTACK*), cycles for other boards get no
// answer, an interrupt acknowledge returns the vector with iack_done, and
// a register write is acknowledged 4 clocks after the data strobes.
module vme_control_tb;
  logic clk = 0, rst;
  logic [23:1] addr; logic [5:0] am; logic as_n, lword_n, write_n, iack_n, iackin_n;
  logic [1:0] ds_n; logic [31:0] data_m, data_out;
  logic data_oe, dtack_n, berr_n, sel, reg_ok, d32, reg_rd, reg_wr, rd_ack, iack_hit, iack_done;
  logic [31:0] wr_data, rd_data;
  int checks = 0, failures = 0;

  vme_control dut (.clk, .rst, .as_n, .ds_n, .write_n, .data_in(data_m), .data_out, .data_oe,
    .dtack_n, .berr_n, .sel, .reg_ok, .d32, .reg_rd, .reg_wr, .wr_data, .rd_data, .rd_ack,
    .iack_hit, .iack_vector(8'hC7), .iack_done);

  vme_master_bfm bfm (.clk, .addr, .am, .as_n, .ds_n, .lword_n, .write_n, .iack_n, .iackin_n,
    .data(data_m), .data_rd(data_out), .dtack_n, .berr_n);

  always #5 clk = ~clk;

  // testbench address decode and register file
  always_comb begin
    sel    = iack_n && addr[23:16] == 8'h5A && am == 6'h39;
    reg_ok = addr[15:4] == 0;
    d32    = !lword_n && ds_n == 2'b00 && !addr[1];
  end
  logic [31:0] regs [4];
  logic [1:0]  rd_idx;
  int wait_cnt = -1, iack_dones = 0;
  bit irq_pend = 0;
  assign iack_hit = irq_pend && !iack_n && !as_n && !iackin_n;
  always @(posedge clk) begin
    rd_ack <= 0;
    if (reg_wr && !rst) regs[addr[3:2]] <= wr_data;
    if (reg_rd) begin rd_idx <= addr[3:2]; wait_cnt <= int'($urandom_range(0, 3)); end
    else if (wait_cnt == 0) begin rd_ack <= 1; rd_data <= regs[rd_idx]; wait_cnt <= -1; end
    else if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
    if (iack_done) begin irq_pend <= 0; iack_dones++; end
    if (!rst && !dtack_n && !berr_n) begin failures++; $display("FAIL DTACK* and BERR* together"); end
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, shadow [4];
    bit berr, ok; int clocks; logic [7:0] vec;
    rst = 1;
    for (int i = 0; i < 4; i++) begin regs[i] = 0; shadow[i] = 0; end
    repeat (4) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 200; t++) begin
      int k;
      k = int'($urandom_range(0, 3));
      case ($urandom_range(0, 5))
        0, 1: begin
          v = $urandom;
          bfm.write32(24'h5A0000 | 24'(4 * k), v, berr, clocks);
          shadow[k] = v;
          chk(!berr, "write acknowledged");
          chk(clocks == 4, $sformatf("write DTACK* after %0d clocks", clocks));
        end
        2, 3: begin
          bfm.read32(24'h5A0000 | 24'(4 * k), v, berr, clocks);
          chk(!berr && v == shadow[k], $sformatf("read %0d: %h expected %h", k, v, shadow[k]));
        end
        4: begin
          bfm.read32(24'h5A0100, v, berr, clocks);
          chk(berr, "unused offset gives BERR*");
          bfm.read16(24'h5A0000, v, berr, clocks);
          chk(berr, "D16 gives BERR*");
        end
        default: begin
          irq_pend = 1;
          bfm.iack(3'd2, vec, ok);
          chk(ok && vec == 8'hC7, "acknowledge vector");
        end
      endcase
    end
    // another board's address: no answer (the master times out)
    bfm.read32(24'h330000, v, berr, clocks);
    chk(!berr && clocks > 200, "other board ignored");
    chk(iack_dones > 10, "acknowledge cycles ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
