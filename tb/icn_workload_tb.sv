// icn_workload_tb: runs the cluster counter at its default size (12 x 11
// cells) on event-like hit maps and compares it with the exact number of
// clusters. Each event places 1 to 8 showers, the range of cluster counts a
// board sees in collision data. A shower hits a random seed cell and each
// of its four edge neighbours with probability 1/4. A corner cell is added,
// with probability 1/2, only where both edge cells beside it are hit, as
// energy reaches a diagonal cell only through its sides. This shower model
// is the bench's own, a rough stand-in for simulated physics events.
// Showers land independently, so they may touch and merge.
// The exact count is an 8-neighbour flood fill done in the bench. The bench
// checks two things for every event:
//   * the hardware ICN equals the local rule evaluated here independently,
//     saturated to 4 bits;
//   * the rule never under-counts: every cluster has exactly one upper-most
//     cell in its right-most column, and that cell always passes the rule.
//   * an event with a single shower is counted exactly.
// It then prints a histogram of ICN minus the exact count. That difference
// shows how often the local rule over-counts on such events.
// The counter is combinational; the bench waits 1 ns per event.
module icn_workload_tb;
  localparam int ROWS = 12, COLS = 11, N = ROWS * COLS, EVENTS = 5000;
  localparam int DR[4] = '{-1, 0, 1, 0};
  localparam int DC[4] = '{0, 1, 0, -1};

  logic [N-1:0] hit, counted;
  logic [3:0]   icn;
  int checks = 0, failures = 0;
  int hist[0:4];

  icn_counter dut (.hit, .icn, .counted(counted));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit h(input logic [N-1:0] m, input int r, input int c);
    if (r < 0 || r >= ROWS || c < 0 || c >= COLS) return 1'b0;
    return m[r*COLS+c];
  endfunction

  function automatic int rule_count(input logic [N-1:0] m);
    int n;
    n = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        if (h(m,r,c) && !h(m,r-1,c) && !h(m,r,c+1) && !(h(m,r+1,c) && h(m,r+1,c+1)))
          n++;
    return n;
  endfunction

  function automatic int exact_count(input logic [N-1:0] m);
    logic [N-1:0] seen;
    int stack[$];
    int n, cur, r, c;
    seen = '0;
    n = 0;
    for (int i = 0; i < N; i++) begin
      if (m[i] && !seen[i]) begin
        n++;
        seen[i] = 1'b1;
        stack.push_back(i);
        while (stack.size() > 0) begin
          cur = stack.pop_back();
          r = cur / COLS;
          c = cur % COLS;
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++)
              if (h(m, r+dr, c+dc) && !seen[(r+dr)*COLS+c+dc]) begin
                seen[(r+dr)*COLS+c+dc] = 1'b1;
                stack.push_back((r+dr)*COLS+c+dc);
              end
        end
      end
    end
    return n;
  endfunction

  initial begin
    int nsh, sr, sc, ref_icn, exact, d, over;
    bit nb[4];
    void'($urandom(2024));
    for (int i = 0; i <= 4; i++) hist[i] = 0;
    over = 0;
    for (int ev = 0; ev < EVENTS; ev++) begin
      hit = '0;
      nsh = 1 + ($urandom % 8);
      for (int s = 0; s < nsh; s++) begin
        sr = $urandom % ROWS;
        sc = $urandom % COLS;
        hit[sr*COLS+sc] = 1'b1;
        // edge neighbours: up, right, down, left
        for (int k = 0; k < 4; k++) begin
          nb[k] = ($urandom % 4) == 0;
          if (nb[k] && sr+DR[k] >= 0 && sr+DR[k] < ROWS && sc+DC[k] >= 0 && sc+DC[k] < COLS)
            hit[(sr+DR[k])*COLS+sc+DC[k]] = 1'b1;
        end
        // a corner cell only when both edge cells next to it are hit
        for (int k = 0; k < 4; k++)
          if (nb[k] && nb[(k+1)%4] && ($urandom % 2) == 0 &&
              sr+DR[k]+DR[(k+1)%4] >= 0 && sr+DR[k]+DR[(k+1)%4] < ROWS &&
              sc+DC[k]+DC[(k+1)%4] >= 0 && sc+DC[k]+DC[(k+1)%4] < COLS)
            hit[(sr+DR[k]+DR[(k+1)%4])*COLS+sc+DC[k]+DC[(k+1)%4]] = 1'b1;
      end
      #1;
      checks++;
      if ($countones(counted) != rule_count(hit)) failures++;   // per-cell decisions
      ref_icn = rule_count(hit);
      exact   = exact_count(hit);
      checks++;
      if (int'(icn) != ((ref_icn > 15) ? 15 : ref_icn)) begin
        failures++;
        if (failures < 10) $display("event %0d: icn=%0d rule=%0d", ev, icn, ref_icn);
      end
      checks++;
      if (ref_icn < exact) begin
        failures++;
        if (failures < 10) $display("event %0d: rule %0d below exact %0d", ev, ref_icn, exact);
      end
      // a lone shower of these shapes is always counted exactly
      if (nsh == 1) begin
        checks++;
        if (ref_icn != exact) begin
          failures++;
          if (failures < 10) $display("event %0d: single shower counted %0d", ev, ref_icn);
        end
      end
      d = ref_icn - exact;
      if (d < 0) d = 0;
      if (d > 4) d = 4;
      hist[d]++;
      if (d > 0) over++;
    end
    $display("events=%0d exact match=%0d over-count by 1=%0d by 2=%0d by 3=%0d by 4+=%0d",
             EVENTS, hist[0], hist[1], hist[2], hist[3], hist[4]);
    $display("fraction of events counted exactly: %0d per mille", (hist[0] * 1000) / EVENTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
