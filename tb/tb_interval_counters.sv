// tb_interval_counters: drives random events and amounts into the interval
// counters and compares every counter with a reference sum, across a clear.
module tb_interval_counters;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, ev_hit = 0, ev_miss = 0, ev_load_miss = 0, ev_mem_access = 0, trans_valid = 0;
  logic [1:0] n_refreshed = '0;
  logic [31:0] trans_lines = '0;
  logic [6:0] n_active = '0;
  logic [63:0] cycles, l2_hits, l2_misses, l2_load_miss, dram_access, refreshed, transitions, active_sum;
  longint m[8];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  interval_counters dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (m[i]) m[i] = 0;
      for (int i = 0; i < 2000; i++) begin
        ev_hit = 1'($urandom); ev_miss = 1'($urandom); ev_load_miss = ev_miss & 1'($urandom);
        ev_mem_access = 1'($urandom); n_refreshed = 2'($urandom_range(0, 2));
        trans_valid = ($urandom_range(0, 50) == 0); trans_lines = 32'($urandom_range(0, 64) * 512);
        n_active = 7'($urandom_range(8, 64));
        m[0]++; m[1] += ev_hit; m[2] += ev_miss; m[3] += ev_load_miss; m[4] += ev_mem_access;
        m[5] += n_refreshed; m[6] += trans_valid ? trans_lines : 0; m[7] += n_active;
        @(negedge clk);
      end
      ev_hit = 0; ev_miss = 0; ev_load_miss = 0; ev_mem_access = 0; n_refreshed = 0; trans_valid = 0; n_active = 0;
      check(cycles == 64'(m[0]), "cycles");
      check(l2_hits == 64'(m[1]), "hits");
      check(l2_misses == 64'(m[2]), "misses");
      check(l2_load_miss == 64'(m[3]), "load misses");
      check(dram_access == 64'(m[4]), "dram accesses");
      check(refreshed == 64'(m[5]), "refreshed lines");
      check(transitions == 64'(m[6]), "transitions");
      check(active_sum == 64'(m[7]), "active sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
