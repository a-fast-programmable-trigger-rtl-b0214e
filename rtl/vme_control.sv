// vme_control: cycle control of the VME A24/D32 slave. AS* and DS1*/DS0*
// are brought into the board clock domain through two flip-flops; the
// address, AM code, WRITE* and data are taken directly, since the VME
// protocol holds them stable while the strobes are low. A cycle starts
// when AS* and a data strobe are low and either the decoder selects
// the board or the interrupter claims an acknowledge cycle:
//   - a valid D32 register access issues one reg_rd or reg_wr pulse; a
//     read then waits for rd_ack (the FIFO needs a few clocks) and drives
//     the read data; DTACK* goes low;
//   - an access to an unused register or a non-D32 access gets BERR*;
//   - an acknowledge cycle drives the interrupt vector on D[7:0] and
//     DTACK*, and pulses iack_done.
// DTACK*/BERR* and the data drive are released once both data strobes are
// high again. From DS* low to DTACK* low takes 4 clocks for a register
// write or a CSR read. The paper names this block and its DTACK*/BERR*
// outputs; the state machine is this design's.
module vme_control
  import ccm_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        as_n,
  input  logic [1:0]  ds_n,
  input  logic        write_n,
  input  logic [31:0] data_in,
  output logic [31:0] data_out,
  output logic        data_oe,
  output logic        dtack_n,
  output logic        berr_n,
  // from the address decoder
  input  logic        sel,
  input  logic        reg_ok,
  input  logic        d32,
  // register side
  output logic        reg_rd,
  output logic        reg_wr,
  output logic [31:0] wr_data,
  input  logic [31:0] rd_data,
  input  logic        rd_ack,
  // interrupter side
  input  logic        iack_hit,
  input  logic [7:0]  iack_vector,
  output logic        iack_done
);
  typedef enum logic [2:0] {S_IDLE, S_RD_WAIT, S_ACK, S_BERR} state_e;
  state_e state;

  logic [1:0] as_sync;
  logic [3:0] ds_sync;     // {ds1 stage2, ds0 stage2, ds1 stage1, ds0 stage1}
  logic       strobes_low, strobes_high, as_low;

  always_ff @(posedge clk) begin
    if (rst) begin
      as_sync <= '1;
      ds_sync <= '1;
    end else begin
      as_sync <= {as_sync[0], as_n};
      ds_sync <= {ds_sync[1:0], ds_n};
    end
  end
  assign as_low       = !as_sync[1];
  assign strobes_low  = (ds_sync[3:2] != 2'b11);   // either strobe (D16 gets BERR*)
  assign strobes_high = (ds_sync[3:2] == 2'b11);

  always_ff @(posedge clk) begin
    reg_rd    <= 1'b0;
    reg_wr    <= 1'b0;
    iack_done <= 1'b0;
    if (rst) begin
      state    <= S_IDLE;
      dtack_n  <= 1'b1;
      berr_n   <= 1'b1;
      data_oe  <= 1'b0;
      data_out <= '0;
      wr_data  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (as_low && strobes_low) begin
          if (iack_hit) begin
            data_out  <= {24'h0, iack_vector};
            data_oe   <= 1'b1;
            dtack_n   <= 1'b0;
            iack_done <= 1'b1;
            state     <= S_ACK;
          end else if (sel) begin
            if (reg_ok && d32) begin
              if (write_n) begin
                reg_rd <= 1'b1;
                state  <= S_RD_WAIT;
              end else begin
                wr_data <= data_in;
                reg_wr  <= 1'b1;
                dtack_n <= 1'b0;
                state   <= S_ACK;
              end
            end else begin
              berr_n <= 1'b0;
              state  <= S_BERR;
            end
          end
        end
        S_RD_WAIT: if (rd_ack) begin
          data_out <= rd_data;
          data_oe  <= 1'b1;
          dtack_n  <= 1'b0;
          state    <= S_ACK;
        end
        S_ACK, S_BERR: if (strobes_high) begin
          dtack_n <= 1'b1;
          berr_n  <= 1'b1;
          data_oe <= 1'b0;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // DTACK* and BERR* are never asserted together
  a_dtack_berr: assert property (@(posedge clk) disable iff (rst) !(!dtack_n && !berr_n));
`endif
endmodule
