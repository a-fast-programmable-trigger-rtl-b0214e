// vme_addr_decoder: address comparators of the VME slave. The board
// answers A24 data cycles (address modifier 0x39 or 0x3D) whose upper
// address byte A[23:16] equals the 8-bit DIP-switch setting, giving each
// board a 64 KiB window. Inside it the register index is A[5:2]; reg_ok
// says the index is one of the four registers and A[15:6] is zero. d32
// says the cycle is a 32-bit transfer (LWORD*, DS0* and DS1* low, A1 = 0).
// The 8-bit base-address switch and the A24/D32 slave type are the
// paper's; the window size, the modifiers and the register map are this
// design's. Purely combinational.
module vme_addr_decoder
  import ccm_pkg::*;
(
  input  logic [23:1] addr,
  input  logic [5:0]  am,
  input  logic        iack_n,
  input  logic        lword_n,
  input  logic [1:0]  ds_n,
  input  logic [7:0]  base_sw,
  output logic        sel,
  output reg_e        reg_idx,
  output logic        reg_ok,
  output logic        d32
);
  always_comb begin
    sel     = iack_n && (addr[23:16] == base_sw) && (am == AM_A24_USER || am == AM_A24_SUP);
    reg_idx = reg_e'(addr[5:2]);
    reg_ok  = (addr[15:6] == '0) &&
              (reg_idx inside {REG_CSR, REG_FIFO, REG_CFG, REG_IRQ});
    d32     = !lword_n && (ds_n == 2'b00) && !addr[1];
  end
endmodule
