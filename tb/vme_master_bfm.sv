// vme_master_bfm: VME bus master for testbenches. Its tasks run one A24
// cycle each: write32 / read32 (address modifier 0x39 unless changed),
// a D16 read that the slave must refuse, and an interrupt acknowledge
// cycle for a given level that drives IACKIN* low. Each task waits for
// DTACK* or BERR*, or gives up after 'timeout' clocks of 'clk', and
// returns the data, the bus error flag and the number of clk periods from
// the data strobes to the answer. Not synthesizable.
module vme_master_bfm (
  input  logic        clk,
  output logic [23:1] addr,
  output logic [5:0]  am,
  output logic        as_n,
  output logic [1:0]  ds_n,
  output logic        lword_n,
  output logic        write_n,
  output logic        iack_n,
  output logic        iackin_n,
  output logic [31:0] data,
  input  logic [31:0] data_rd,
  input  logic        dtack_n,
  input  logic        berr_n
);
  initial begin
    addr = '0; am = 6'h39; as_n = 1; ds_n = 2'b11; lword_n = 1; write_n = 1;
    iack_n = 1; iackin_n = 1; data = '0;
  end

  task automatic finish_cycle(output logic [31:0] rd, output bit berr, output int clocks, output bit timeout);
    clocks = 0; timeout = 0;
    while (dtack_n && berr_n) begin
      @(posedge clk);
      clocks++;
      if (clocks > 200) begin timeout = 1; break; end
    end
    #1;
    rd   = data_rd;
    berr = !berr_n;
    @(negedge clk);
    ds_n = 2'b11;
    @(negedge clk);
    as_n = 1; iack_n = 1; iackin_n = 1; write_n = 1; lword_n = 1;
    while (!dtack_n || !berr_n) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic write32(input logic [23:0] a, input logic [31:0] v, output bit berr, output int clocks);
    logic [31:0] rd; bit to;
    @(negedge clk);
    addr = a[23:1]; am = 6'h39; write_n = 0; lword_n = 0; data = v; iack_n = 1;
    @(negedge clk) as_n = 0;
    @(negedge clk) ds_n = 2'b00;
    finish_cycle(rd, berr, clocks, to);
    if (to) $display("vme_master_bfm: write timeout at %h", a);
  endtask

  task automatic read32(input logic [23:0] a, output logic [31:0] v, output bit berr, output int clocks);
    bit to;
    @(negedge clk);
    addr = a[23:1]; am = 6'h39; write_n = 1; lword_n = 0; iack_n = 1;
    @(negedge clk) as_n = 0;
    @(negedge clk) ds_n = 2'b00;
    finish_cycle(v, berr, clocks, to);
    if (to) $display("vme_master_bfm: read timeout at %h", a);
  endtask

  task automatic read16(input logic [23:0] a, output logic [31:0] v, output bit berr, output int clocks);
    bit to;
    @(negedge clk);
    addr = a[23:1]; am = 6'h39; write_n = 1; lword_n = 1; iack_n = 1;
    @(negedge clk) as_n = 0;
    @(negedge clk) ds_n = 2'b01;
    finish_cycle(v, berr, clocks, to);
  endtask

  // Interrupt acknowledge for 'level'; ok = a slave answered with DTACK*
  task automatic iack(input logic [2:0] level, output logic [7:0] vector, output bit ok);
    logic [31:0] rd; bit berr, to; int clocks;
    @(negedge clk);
    addr = '0; addr[3:1] = level; am = 6'h39; write_n = 1; lword_n = 1; iack_n = 0;
    @(negedge clk) as_n = 0;
    @(negedge clk) begin ds_n = 2'b00; iackin_n = 0; end
    finish_cycle(rd, berr, clocks, to);
    vector = rd[7:0];
    ok = !to && !berr;
  endtask
endmodule
