// tb_refresh_controller: valid-only refresh on a small cache (4 colors x 4
// sets x 4 ways, two banks, 300-cycle period). Before each refresh-event the
// testbench picks random valid bits and a random set of powered colors. It
// then checks that during the event every valid line of a powered color is
// refreshed exactly once, no other line at all, at most one line per bank per
// cycle, that events start exactly every REFRESH_PERIOD cycles, that the walk
// takes the cycle count the design promises (per set: one cycle to read the
// valid bits plus one per valid line, at least one), and that N_R matches.
module tb_refresh_controller;
  localparam int unsigned NC = 4, SPC = 4, WAYS = 4, NB = 2, PER = 300;
  localparam int unsigned SETS = NC * SPC, SET_W = $clog2(SETS), WAY_W = 2, BS = SETS / NB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NC-1:0] color_on;
  logic [SET_W-1:0] scan_set [NB], ref_set [NB];
  logic [WAYS-1:0] scan_valid [NB];
  logic [NB-1:0] ref_fire;
  logic [WAY_W-1:0] ref_way [NB];
  logic [1:0] n_refreshed;
  logic event_start, walking, overrun;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  refresh_controller #(.NUM_COLORS(NC), .WAYS(WAYS), .NUM_BANKS(NB), .REFRESH_PERIOD(PER),
                       .SETS_PER_COLOR(SPC)) dut (.*);

  logic [WAYS-1:0] vld [SETS];
  always_comb for (int b = 0; b < NB; b++) scan_valid[b] = vld[scan_set[b]];

  int cnt [SETS][WAYS];
  int walk_cycles, nr_sum, last_start, ev_count;
  always @(posedge clk) if (rst_n) begin
    if (walking) walk_cycles++;
    nr_sum += int'(n_refreshed);
    for (int b = 0; b < NB; b++) if (ref_fire[b]) begin
      cnt[ref_set[b]][ref_way[b]]++;
      if (int'(ref_set[b]) / BS != b) begin failures++; $display("FAIL: bank %0d refreshed set %0d", b, ref_set[b]); end
    end
  end

  function automatic int expected_walk();
    int worst = 0;
    for (int b = 0; b < NB; b++) begin
      int c = 0;
      for (int s = b * BS; s < (b + 1) * BS; s++) begin
        int k = color_on[s / SPC] ? $countones(vld[s]) : 0;
        c += 1 + ((k > 0) ? k : 1);
      end
      if (c > worst) worst = c;
    end
    return worst;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    color_on = '1;
    foreach (vld[s]) vld[s] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    ev_count = 0;
    cyc = 0;
    for (int e = 0; e < 12; e++) begin
      // new random contents while no walk is running
      foreach (vld[s]) vld[s] = WAYS'($urandom);
      if (e == 5) foreach (vld[s]) vld[s] = '0;   // an empty cache
      color_on = (e == 3) ? '0 : NC'($urandom) | NC'(1);
      foreach (cnt[s, w]) cnt[s][w] = 0;
      walk_cycles = 0; nr_sum = 0;
      do begin @(posedge clk); cyc++; end while (!event_start);
      if (e > 0) check(cyc - last_start == PER, $sformatf("event spacing %0d", cyc - last_start));
      last_start = cyc;
      #1;
      while (walking) begin @(posedge clk); cyc++; #1; end
      begin
        int want_nr;
        want_nr = 0;
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) begin
            int want;
            want = (vld[s][w] && color_on[s / SPC]) ? 1 : 0;
            want_nr += want;
            check(cnt[s][w] == want, $sformatf("event %0d set %0d way %0d refreshed %0d times", e, s, w, cnt[s][w]));
          end
        check(nr_sum == want_nr, "N_R equals refreshed lines");
        check(walk_cycles == expected_walk(), $sformatf("walk took %0d cycles, expected %0d", walk_cycles, expected_walk()));
      end
    end
    check(!overrun, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
