// vme_addr_decoder_tb: random and hand-picked VME addresses, address
// modifiers, IACK*, LWORD* and data strobes are decoded and compared with
// a reference written from the register map: board selected when A[23:16]
// matches the switch, the modifier is 0x39 or 0x3D and IACK* is high;
// register valid for offsets 0x0, 0x4, 0x8, 0xC with A[15:6] zero; D32
// when LWORD*, DS0*, DS1* and A1 are all low.
module vme_addr_decoder_tb;
  import ccm_pkg::*;
  logic [23:1] addr;
  logic [5:0]  am;
  logic        iack_n, lword_n;
  logic [1:0]  ds_n;
  logic [7:0]  base_sw;
  logic        sel, reg_ok, d32;
  reg_e        reg_idx;
  int checks = 0, failures = 0;

  vme_addr_decoder dut (.addr, .am, .iack_n, .lword_n, .ds_n, .base_sw, .sel, .reg_idx, .reg_ok, .d32);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] a;
    bit e_sel, e_ok, e_d32;
    for (int t = 0; t < 3000; t++) begin
      base_sw = 8'($urandom);
      a = 24'($urandom);
      case ($urandom_range(0, 3))
        0: a[23:16] = base_sw;
        1: begin a[23:16] = base_sw; a[15:0] = 16'(4 * $urandom_range(0, 5)); end
        default: ;
      endcase
      am      = ($urandom_range(0, 2) == 0) ? 6'($urandom) : (($urandom_range(0,1) == 0) ? 6'h39 : 6'h3D);
      iack_n  = ($urandom_range(0, 7) != 0);
      lword_n = ($urandom_range(0, 3) == 0);
      ds_n    = ($urandom_range(0, 3) == 0) ? 2'($urandom) : 2'b00;
      addr    = a[23:1];
      #1;
      e_sel = iack_n && a[23:16] == base_sw && (am == 6'h39 || am == 6'h3D);
      e_ok  = (a[15:6] == 0) && (a[5:0] inside {6'h00, 6'h01, 6'h02, 6'h03, 6'h04, 6'h05, 6'h06, 6'h07,
                                                6'h08, 6'h09, 6'h0A, 6'h0B, 6'h0C, 6'h0D, 6'h0E, 6'h0F});
      e_d32 = !lword_n && ds_n == 2'b00 && !a[1];
      checks++;
      if (sel !== e_sel || reg_ok !== e_ok || d32 !== e_d32 || (e_ok && int'(reg_idx) != int'(a[5:2]))) begin
        failures++;
        $display("FAIL a=%h am=%h sw=%h: sel=%b/%b ok=%b/%b d32=%b/%b idx=%0d", a, am, base_sw,
                 sel, e_sel, reg_ok, e_ok, d32, e_d32, reg_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
