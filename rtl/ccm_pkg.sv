// ccm_pkg: constants and types shared by the Cluster Counting Module (CCM)
// trigger board. It fixes the board's signal counts (132 used trigger-cell
// inputs of 144, 16 used outputs of 24), the layout of one pattern-register
// record in the 24-bit wide FIFO RAM, and the VME register map of the CPLD.
// The signal counts and the record contents follow the paper; the register
// map, the record's bit order and the status/control bit positions are this
// design's own choices.
package ccm_pkg;

  // Board I/O (paper: 144 ECL inputs / 24 ECL outputs, 132 / 16 used in BELLE)
  localparam int unsigned N_IN_MAX   = 144;
  localparam int unsigned N_OUT_MAX  = 24;
  localparam int unsigned N_IN       = 132;
  localparam int unsigned N_OUT      = 16;
  localparam int unsigned ICN_BITS   = 4;    // LCCN0..LCCN3

  // Pattern register record: 132 inputs, 16 outputs, 8 reserved bits,
  // 10 memory address bits and 2 unused bits = 168 bits = 7 words of 24 bits.
  localparam int unsigned WORD_BITS  = 24;
  localparam int unsigned RSV_BITS   = 8;
  localparam int unsigned FIFO_DEPTH = 1024;  // 3 x IDT 7202 (1024 x 8 each)
  localparam int unsigned ADDR_BITS  = $clog2(FIFO_DEPTH);
  localparam int unsigned PAD_BITS   = 2;

  // VME A24 address modifiers accepted (standard A24 data access codes)
  localparam logic [5:0] AM_A24_USER = 6'h39;
  localparam logic [5:0] AM_A24_SUP  = 6'h3D;

  // Register index = A[5:2] inside the board's window
  typedef enum logic [3:0] {
    REG_CSR   = 4'h0,   // control (write) / status (read)
    REG_FIFO  = 4'h1,   // read: next pattern-register word, pops the FIFO
    REG_CFG   = 4'h2,   // write: one FPGA configuration byte (VME mode)
    REG_IRQ   = 4'h3    // interrupt vector [7:0] and level [10:8]
  } reg_e;

  // CSR write bits (pulses unless noted)
  localparam int unsigned CTL_TRIG_STOP  = 0;
  localparam int unsigned CTL_TRIG_START = 1;
  localparam int unsigned CTL_CFG_PROM   = 2;
  localparam int unsigned CTL_CFG_VME    = 3;
  localparam int unsigned CTL_FIFO_RST   = 4;
  localparam int unsigned CTL_REC_EN     = 5;   // level
  localparam int unsigned CTL_IRQ_EN     = 6;   // level
  localparam int unsigned CTL_MTG_CLR    = 7;
  localparam int unsigned CTL_MOD_RST    = 8;   // wins over all others

  // CSR read bits
  localparam int unsigned ST_TRIG_ON   = 0;
  localparam int unsigned ST_CFG_DONE  = 1;
  localparam int unsigned ST_CFG_BUSY  = 2;
  localparam int unsigned ST_FIFO_EMPTY= 3;
  localparam int unsigned ST_FIFO_FULL = 4;
  localparam int unsigned ST_REC_EN    = 5;
  localparam int unsigned ST_IRQ_EN    = 6;
  localparam int unsigned ST_MTG_SEEN  = 7;
  localparam int unsigned ST_CFG_VME   = 8;
  localparam int unsigned ST_IRQ_PEND  = 9;
  localparam int unsigned ST_MTG_LOST  = 10;

  // Logic loaded into the FPGA: cluster counting (section boards) or
  // summing of five section counts (the system's summing board)
  typedef enum logic [0:0] { LOGIC_ICN = 1'b0, LOGIC_SUM = 1'b1 } fpga_logic_e;

  // Configuration source
  typedef enum logic [0:0] { CFG_SRC_PROM = 1'b0, CFG_SRC_VME = 1'b1 } cfg_src_e;

endpackage
