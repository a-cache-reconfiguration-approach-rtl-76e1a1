// tb_reconfig_controller: drives software commits into the reconfiguration
// sequencer (64 colors, 512 lines per color) with a stand-in cache that
// answers flush_start with flush_done after a random delay. Checks: the flush
// walks the current colors and keeps the staged ones; the power state and the
// map switch only together, after flush_done; B = changed colors x 512; busy
// covers the whole sequence; an empty mask is refused with cfg_error.
module tb_reconfig_controller;
  localparam int unsigned NC = 64, LPC = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_mask_we = 0, cfg_commit = 0, busy, cfg_error, flush_start, flush_done = 0, map_commit, trans_valid;
  logic [NC-1:0] cfg_mask = '0, flush_walk_mask, flush_keep_mask, color_on;
  logic [6:0] n_active;
  logic [31:0] trans_lines;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  reconfig_controller dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NC-1:0] cur, nxt;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(color_on == '1 && n_active == 7'd64, "all colors on after reset");
    cur = '1;
    for (int i = 0; i < 20; i++) begin
      int d, starts;
      nxt = {$urandom, $urandom};
      if (i == 0) nxt = {32'h0, 32'hFFFF_FFFF};   // halve the cache
      cfg_mask_we = 1; cfg_mask = nxt; @(negedge clk); cfg_mask_we = 0;
      cfg_commit = 1; @(negedge clk); cfg_commit = 0;
      check(busy, "busy after commit");
      starts = 0;
      d = $urandom_range(1, 40);
      for (int c = 0; c < d; c++) begin
        if (flush_start) begin
          starts++;
          check(flush_walk_mask == cur && flush_keep_mask == nxt, "flush masks");
        end
        check(color_on == cur && !map_commit, "nothing switches before flush_done");
        @(negedge clk);
      end
      check(starts == 1, "exactly one flush_start pulse");
      flush_done = 1; @(negedge clk); flush_done = 0;
      check(map_commit && trans_valid, "map commit and transition pulse after flush_done");
      check(color_on == nxt, "power state switched");
      check(trans_lines == 32'($countones(cur ^ nxt) * LPC), $sformatf("B = %0d", trans_lines));
      check(n_active == 7'($countones(nxt)), "active color count");
      check(!busy, "idle again");
      @(negedge clk);
      check(!map_commit && !trans_valid, "pulses last one cycle");
      cur = nxt;
    end
    cfg_mask_we = 1; cfg_mask = '0; @(negedge clk); cfg_mask_we = 0;
    cfg_commit = 1; @(negedge clk); cfg_commit = 0; @(negedge clk);
    check(cfg_error && !busy && color_on == cur, "empty mask refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
