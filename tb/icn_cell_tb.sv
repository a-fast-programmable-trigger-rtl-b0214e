// icn_cell_tb: exhaustive check of the one-cell isolation decision. All
// 32 combinations of cells 0-4 are applied and compared with the counting
// rule written out case by case: a cell is counted only when it is hit,
// is the top of its column (cell 1 empty), has nothing to its right
// (cell 2 empty) and its cluster does not continue to the lower right
// (cells 3 and 4 not both hit).
module icn_cell_tb;
  logic [4:0] c;
  logic       isolated;
  int checks = 0, failures = 0;

  icn_cell dut (.c, .isolated);

  function automatic logic expected(input logic [4:0] v);
    if (!v[0])         return 1'b0;   // nothing there
    if (v[1])          return 1'b0;   // a cell above belongs to the cluster
    if (v[2])          return 1'b0;   // a cell to the right belongs to it
    if (v[3] && v[4])  return 1'b0;   // cluster goes on to the lower right
    return 1'b1;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones = 0;
    for (int v = 0; v < 32; v++) begin
      c = 5'(v);
      #1;
      checks++;
      if (isolated !== expected(c)) begin
        failures++;
        $display("FAIL c=%b isolated=%b", c, isolated);
      end
      ones += int'(isolated);
    end
    // Exactly 3 of the 16 patterns with cell 0 hit are counted
    checks++;
    if (ones != 3) begin failures++; $display("FAIL counted patterns=%0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
