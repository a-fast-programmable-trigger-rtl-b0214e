// icn_cell: isolated-cluster decision for one trigger cell.
// Cells are numbered as in the paper's 3x3 diagram: 0 is the cell under
// test, 1 the cell above it, 2 the cell to its right, 3 the cell below it
// and 4 the cell below and to the right. Of a group of touching hit cells
// only the upper-most cell of the right-most column is counted, so cell 0
// counts when it is hit, neither cell 1 nor cell 2 is hit, and cells 3 and
// 4 are not both hit (a hit pair 3-4 means the cluster reaches further
// right below cell 0). The choice of cells and their grouping ({1,2} and
// {3,4}) is the paper's; the gate function is derived here from the
// paper's counting rule. Purely combinational, as in the paper's
// asynchronous FPGA logic.
module icn_cell (
  input  logic [4:0] c,          // c[k] = hit of cell k
  output logic       isolated    // cell 0 is counted as one cluster
);
  always_comb isolated = c[0] & ~(c[1] | c[2]) & ~(c[3] & c[4]);
endmodule
