// icn_counter_tb: the isolated cluster number of the default 12 x 11 map
// is compared with a reference that walks a 2-D copy of the map and applies
// the counting rule cell by cell, for hand-made patterns (single cells,
// 2x2 blocks, vertical and horizontal bars, diagonal pairs, edge cells)
// and for random sparse maps. A second reference, a true connected-cluster
// count (8-neighbour flood fill), is compared on patterns of well separated
// compact clusters, where both must agree, and its disagreement rate on
// random maps is printed. Saturation at 15 is checked with a chequerboard.
module icn_counter_tb;
  localparam int R = 12, C = 11, N = R * C;
  logic [N-1:0] hit;
  logic [3:0]   icn;
  logic [N-1:0] counted;
  int checks = 0, failures = 0;

  icn_counter dut (.hit, .icn, .counted);

  function automatic bit at(input logic [N-1:0] h, input int r, input int c);
    if (r < 0 || r >= R || c < 0 || c >= C) return 0;
    return h[r*C + c];
  endfunction

  function automatic int ref_icn(input logic [N-1:0] h);
    int n = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (at(h,r,c) && !at(h,r-1,c) && !at(h,r,c+1) && !(at(h,r+1,c) && at(h,r+1,c+1)))
          n++;
    return n;
  endfunction

  function automatic int perfect(input logic [N-1:0] h);
    bit seen [R][C];
    int stack_r [N];
    int stack_c [N];
    int sp, n = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) seen[r][c] = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        if (at(h,r,c) && !seen[r][c]) begin
          n++;
          sp = 0; stack_r[0] = r; stack_c[0] = c; sp = 1; seen[r][c] = 1;
          while (sp > 0) begin
            int rr, cc;
            sp--; rr = stack_r[sp]; cc = stack_c[sp];
            for (int dr = -1; dr <= 1; dr++)
              for (int dc = -1; dc <= 1; dc++)
                if (at(h, rr+dr, cc+dc) && !seen[rr+dr][cc+dc]) begin
                  seen[rr+dr][cc+dc] = 1;
                  stack_r[sp] = rr+dr; stack_c[sp] = cc+dc; sp++;
                end
          end
        end
    return n;
  endfunction

  function automatic int sat(input int v);
    return v > 15 ? 15 : v;
  endfunction

  task automatic check(input logic [N-1:0] h, input string what);
    hit = h;
    #1;
    checks++;
    if (int'(icn) != sat(ref_icn(h))) begin
      failures++;
      $display("FAIL %s: icn=%0d expected %0d", what, icn, sat(ref_icn(h)));
    end
  endtask

  task automatic set(ref logic [N-1:0] h, input int r, input int c);
    h[r*C + c] = 1'b1;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] h;
    int mism, trials;
    // empty map
    check('0, "empty");
    checks++; if (icn != 0) begin failures++; $display("FAIL empty"); end
    // compact clusters far apart: must match the perfect count exactly
    h = '0;
    set(h, 0, 0);                                  // corner single
    set(h, 2, 3); set(h, 2, 4); set(h, 3, 3); set(h, 3, 4);   // 2x2
    set(h, 6, 0); set(h, 7, 0); set(h, 8, 0);     // vertical bar
    set(h, 10, 6); set(h, 10, 7); set(h, 10, 8);  // horizontal bar
    set(h, 5, 8); set(h, 6, 9);                   // diagonal up-right pair: 2 by the rule
    check(h, "hand-made");
    checks++;
    if (icn != 6) begin failures++; $display("FAIL hand-made icn=%0d expected 6", icn); end
    // L-shape with a lower-right tail: counted once
    h = '0; set(h, 1, 1); set(h, 2, 1); set(h, 2, 2);
    check(h, "L");
    checks++; if (icn != 1) begin failures++; $display("FAIL L icn=%0d", icn); end
    // right edge and bottom edge cells
    h = '0; set(h, 11, 10); set(h, 0, 10); set(h, 11, 0);
    check(h, "edges");
    checks++; if (icn != 3) begin failures++; $display("FAIL edges icn=%0d", icn); end
    // saturation: chequerboard has 66 isolated cells
    h = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) if (((r + c) % 2) == 0 && (r % 2) == 0) set(h, r, c);
    check(h, "many");
    checks++; if (icn != 15) begin failures++; $display("FAIL saturation icn=%0d", icn); end
    // isolated compact clusters placed at random: rule equals perfect count
    for (int t = 0; t < 200; t++) begin
      int ncl = 1 + int'($urandom_range(0, 6));
      h = '0;
      for (int k = 0; k < ncl; k++) begin
        int r = 3 * int'($urandom_range(0, 3));
        int c = 3 * int'($urandom_range(0, 3));
        int shape = int'($urandom_range(0, 3));
        set(h, r, c);
        if (shape == 1) set(h, r, c + 1);
        if (shape == 2) set(h, r + 1, c);
        if (shape == 3) begin set(h, r, c + 1); set(h, r + 1, c); set(h, r + 1, c + 1); end
      end
      check(h, "compact");
      checks++;
      if (int'(icn) != perfect(h)) begin
        failures++;
        $display("FAIL compact: icn=%0d perfect=%0d", icn, perfect(h));
      end
    end
    // random sparse maps against the rule; report disagreement with perfect count
    mism = 0; trials = 2000;
    for (int t = 0; t < trials; t++) begin
      h = '0;
      for (int i = 0; i < N; i++) h[i] = ($urandom_range(0, 99) < 5);
      check(h, "random");
      if (int'(icn) != sat(perfect(h))) mism++;
    end
    $display("random 5%% occupancy: rule differs from perfect count in %0d of %0d maps", mism, trials);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
