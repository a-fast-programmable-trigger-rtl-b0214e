// config_ctrl: FPGA configuration control. A start request from the CSR
// selects the source and reloads the FPGA:
//   - PROM (master serial mode): the FPGA's mode pins are set to master
//     serial and the serial PROM is enabled (prom_ce_n low); the FPGA
//     clocks its bitstream out of the PROM by itself;
//   - VME (peripheral asynchronous mode): the mode pins are set to
//     peripheral asynchronous, and each byte the host writes to the
//     configuration register is put on cfg_d and strobed with cfg_ws_n
//     (one clock low) as soon as the FPGA reports ready (cfg_rdy).
// Both start by holding PROGRAM* low for PROG_CLOCKS clocks. 'busy' lasts
// until the FPGA raises DONE; 'done' follows the FPGA's DONE pin. The two
// sources and mode names are the paper's. The mode-pin codes (XC5200
// family: master serial 000, peripheral asynchronous 101), the PROGRAM*
// pulse length and the single-byte write buffer are this design's.
module config_ctrl
  import ccm_pkg::*;
#(
  parameter int unsigned PROG_CLOCKS = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start_prom,
  input  logic       start_vme,
  input  logic       byte_wr,        // host wrote a configuration byte
  input  logic [7:0] byte_in,
  // FPGA / PROM pins
  output logic       program_n,
  output logic [2:0] mode,
  output logic       prom_ce_n,
  output logic [7:0] cfg_d,
  output logic       cfg_ws_n,
  input  logic       cfg_rdy,
  input  logic       fpga_done,
  // status
  output logic       busy,
  output logic       done,
  output cfg_src_e   src
);
  localparam logic [2:0] MODE_MASTER_SERIAL = 3'b000;
  localparam logic [2:0] MODE_PERIPH_ASYNC  = 3'b101;

  typedef enum logic [1:0] {C_IDLE, C_PROG, C_LOAD} cstate_e;
  cstate_e state;
  logic [$clog2(PROG_CLOCKS+1)-1:0] cnt;
  logic       byte_pend;
  logic [7:0] byte_buf;

  assign done      = fpga_done;
  assign busy      = (state != C_IDLE);
  assign mode      = (src == CFG_SRC_VME) ? MODE_PERIPH_ASYNC : MODE_MASTER_SERIAL;
  assign prom_ce_n = !(state == C_LOAD && src == CFG_SRC_PROM);

  always_ff @(posedge clk) begin
    cfg_ws_n <= 1'b1;
    if (rst) begin
      state     <= C_IDLE;
      src       <= CFG_SRC_PROM;
      program_n <= 1'b1;
      cnt       <= '0;
      byte_pend <= 1'b0;
      byte_buf  <= '0;
      cfg_d     <= '0;
    end else begin
      if (byte_wr) begin
        byte_buf  <= byte_in;
        byte_pend <= 1'b1;
      end
      unique case (state)
        C_IDLE: if (start_prom || start_vme) begin
          src       <= start_prom ? CFG_SRC_PROM : CFG_SRC_VME;
          program_n <= 1'b0;
          cnt       <= '0;
          byte_pend <= 1'b0;
          state     <= C_PROG;
        end else if (byte_wr) begin
          byte_pend <= 1'b0;        // not configuring: byte is ignored
        end
        C_PROG: begin
          if (cnt == $bits(cnt)'(PROG_CLOCKS - 1)) begin
            program_n <= 1'b1;
            state     <= C_LOAD;
          end else cnt <= cnt + 1'b1;
        end
        C_LOAD: begin
          if (fpga_done) state <= C_IDLE;
          else if (src == CFG_SRC_VME && byte_pend && cfg_rdy && cfg_ws_n && !byte_wr) begin
            cfg_d     <= byte_buf;
            cfg_ws_n  <= 1'b0;
            byte_pend <= 1'b0;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
