// icn_sum: trigger logic of the system's summing module. In the paper's
// installation five boards each count the isolated clusters of one
// calorimeter section and a sixth board, running different FPGA logic,
// adds up their counts. Here the five ICNs arrive on the sixth board's
// inputs, ICN k on bits [ICN_BITS*k +: ICN_BITS], and the total is
// produced at full width (no saturation). The wiring of the five counts
// onto the inputs and the output width are this design's choices; the
// paper only says the sixth module sums the outputs of the other five.
// Purely combinational.
module icn_sum #(
  parameter int unsigned N_SEC    = 5,
  parameter int unsigned ICN_BITS = 4,
  parameter int unsigned SUM_BITS = $clog2(N_SEC * ((1 << ICN_BITS) - 1) + 1)
) (
  input  logic [N_SEC*ICN_BITS-1:0] icn_in,
  output logic [SUM_BITS-1:0]       total
);
  always_comb begin
    total = '0;
    for (int k = 0; k < int'(N_SEC); k++)
      total += SUM_BITS'(icn_in[k*ICN_BITS +: ICN_BITS]);
  end
endmodule
