// fifo_ctrl: control of the FIFO RAM that holds the pattern register
// (three 1024 x 8 asynchronous FIFO chips side by side, 24 bits wide).
// One state machine serves both sides, a read first when both wait:
//   - write: a word offered by the pattern register is put on the FIFO
//     data inputs and W* is pulsed low for one clock; 'word_ready'
//     answers in the clock W* is low. No write starts while the
//     full flag FF* is low, which stalls the pattern register.
//   - read: a VME read request pulses R* low for one clock; the word is
//     sampled as R* rises and handed back with rd_ack. Reading an empty
//     FIFO (EF* low) does not strobe R* and answers at once with bit 31
//     set and the word zero.
// A FIFO reset request, or the board reset, holds RS* low for RS_CLOCKS
// clocks. The paper gives the block's name and its role (control of the
// FIFO RAM that serves as the pattern register); the strobe timing, the
// read-first order and the empty-read answer are this design's. Each
// access takes two clocks.
module fifo_ctrl #(
  parameter int unsigned WORD_BITS = 24,
  parameter int unsigned RS_CLOCKS = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 fifo_rst,     // request from the CSR
  // pattern register side
  input  logic [WORD_BITS-1:0] word,
  input  logic                 word_valid,
  output logic                 word_ready,
  // VME side
  input  logic                 rd_req,
  output logic                 rd_ack,
  output logic [31:0]          rd_data,
  // FIFO chips
  output logic [WORD_BITS-1:0] fifo_d,
  output logic                 fifo_w_n,
  output logic                 fifo_r_n,
  output logic                 fifo_rs_n,
  input  logic [WORD_BITS-1:0] fifo_q,
  input  logic                 fifo_ef_n,
  input  logic                 fifo_ff_n,
  output logic                 empty,
  output logic                 full
);
  typedef enum logic [2:0] {F_RESET, F_IDLE, F_WRITE, F_READ} fstate_e;
  fstate_e state;
  logic [$clog2(RS_CLOCKS+1)-1:0] rs_cnt;
  logic rd_pend;

  // The word is taken in the clock that ends the W* pulse, so the pattern
  // register moves on before the next write can start.
  assign word_ready = (state == F_WRITE);
  assign empty = !fifo_ef_n;
  assign full  = !fifo_ff_n;

  always_ff @(posedge clk) begin
    rd_ack     <= 1'b0;
    if (rst || fifo_rst) begin
      state     <= F_RESET;
      rs_cnt    <= '0;
      fifo_rs_n <= 1'b0;
      fifo_w_n  <= 1'b1;
      fifo_r_n  <= 1'b1;
      fifo_d    <= '0;
      rd_data   <= '0;
      rd_pend   <= rd_req;
    end else begin
      if (rd_req) rd_pend <= 1'b1;
      unique case (state)
        F_RESET: begin
          if (rs_cnt == $bits(rs_cnt)'(RS_CLOCKS - 1)) begin
            fifo_rs_n <= 1'b1;
            state     <= F_IDLE;
          end else rs_cnt <= rs_cnt + 1'b1;
        end
        F_IDLE: begin
          if (rd_pend) begin
            rd_pend <= 1'b0;
            if (!fifo_ef_n) begin
              rd_data <= 32'h8000_0000;
              rd_ack  <= 1'b1;
            end else begin
              fifo_r_n <= 1'b0;
              state    <= F_READ;
            end
          end else if (word_valid && fifo_ff_n) begin
            fifo_d   <= word;
            fifo_w_n <= 1'b0;
            state    <= F_WRITE;
          end
        end
        F_WRITE: begin
          fifo_w_n   <= 1'b1;
          state      <= F_IDLE;
        end
        F_READ: begin
          fifo_r_n <= 1'b1;
          rd_data  <= {8'h00, fifo_q};
          rd_ack   <= 1'b1;
          state    <= F_IDLE;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_one_strobe: assert property (@(posedge clk) disable iff (rst) !(!fifo_w_n && !fifo_r_n));
`endif
endmodule
