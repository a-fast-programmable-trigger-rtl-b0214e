// icn_counter: isolated cluster number (ICN) of one board's trigger cells.
// The hits are laid out as a ROWS x COLS map, index r*COLS + col, with row
// 0 at the top and column 0 at the left. Every cell gets an icn_cell
// looking at its upper, right, lower and lower-right neighbours; cells
// outside the map count as not hit. The counted cells are added up and
// the sum saturates at 2**ICN_BITS-1. The paper gives the per-cell rule,
// the 132 inputs and the four ICN bits; the 12 x 11 map shape, the edge
// rule and the saturation are this design's choices. Purely combinational
// (the paper counts asynchronously; its FPGA needs 47 ns).
module icn_counter #(
  parameter int unsigned ROWS     = 12,
  parameter int unsigned COLS     = 11,
  parameter int unsigned ICN_BITS = 4
) (
  input  logic [ROWS*COLS-1:0] hit,
  output logic [ICN_BITS-1:0]  icn,
  output logic [ROWS*COLS-1:0] counted   // per-cell decision, for monitoring
);
  localparam int unsigned N = ROWS * COLS;
  localparam int unsigned SUM_BITS = $clog2(N + 1);

  function automatic logic cell_hit(input logic [N-1:0] h, input int r, input int col);
    if (r < 0 || r >= int'(ROWS) || col < 0 || col >= int'(COLS)) return 1'b0;
    return h[r*COLS + col];
  endfunction

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar col = 0; col < COLS; col++) begin : g_col
      logic [4:0] nb;
      always_comb begin
        nb[0] = cell_hit(hit, r,     col);
        nb[1] = cell_hit(hit, r - 1, col);
        nb[2] = cell_hit(hit, r,     col + 1);
        nb[3] = cell_hit(hit, r + 1, col);
        nb[4] = cell_hit(hit, r + 1, col + 1);
      end
      icn_cell u_cell (.c(nb), .isolated(counted[r*COLS + col]));
    end
  end

  logic [SUM_BITS-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < int'(N); i++) sum += SUM_BITS'(counted[i]);
    if (sum > SUM_BITS'((1 << ICN_BITS) - 1)) icn = '1;
    else                                      icn = sum[ICN_BITS-1:0];
  end
endmodule
