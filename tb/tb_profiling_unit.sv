// tb_profiling_unit: one profiling unit emulating X/4 of a 4096-set, 8-way
// cache (1024 sets, 1-in-64 sampling, 16 sampled sets) against a reference LRU
// model, with a footprint that gives both hits and misses.
module tb_profiling_unit;
  import edram_pkg::*;
  localparam int unsigned SETS = 1024, WAYS = 8, RATIO = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_valid = 0, acc_load = 0;
  paddr_t acc_addr = '0;
  logic [31:0] accesses, misses, load_misses;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  profiling_unit #(.SIZE_SHIFT(2)) dut (.*);

  typedef longint unsigned tagq_t[$];
  tagq_t model [int];
  int m_acc, m_miss, m_lmiss;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    m_acc = 0; m_miss = 0; m_lmiss = 0;
    for (int i = 0; i < 40000; i++) begin
      paddr_t a;
      int set, pos;
      longint unsigned tag;
      a = paddr_t'($urandom_range(0, 16383)) << OFFS_W;
      if ($urandom_range(0, 3) != 0) a[OFFS_W +: 6] = '0;
      acc_valid = 1; acc_addr = a; acc_load = 1'($urandom);
      set = int'((a >> OFFS_W) % SETS);
      tag = a >> (OFFS_W + 10);
      if (set % RATIO == 0) begin
        m_acc++;
        pos = -1;
        foreach (model[set][j]) if (model[set][j] == tag) pos = j;
        if (pos < 0) begin
          m_miss++; if (acc_load) m_lmiss++;
          if (model[set].size() == WAYS) void'(model[set].pop_back());
        end else model[set].delete(pos);
        model[set].push_front(tag);
      end
      @(negedge clk);
      if (i % 1000 == 999) begin
        check(accesses == 32'(m_acc), $sformatf("accesses %0d vs %0d", accesses, m_acc));
        check(misses == 32'(m_miss), $sformatf("misses %0d vs %0d", misses, m_miss));
        check(load_misses == 32'(m_lmiss), $sformatf("load misses %0d vs %0d", load_misses, m_lmiss));
      end
    end
    check(m_miss > 100 && m_acc - m_miss > 100, "stream has hits and misses");
    acc_valid = 0; clear = 1; @(negedge clk); clear = 0;
    check(accesses == 0 && misses == 0 && load_misses == 0, "clear zeroes counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
