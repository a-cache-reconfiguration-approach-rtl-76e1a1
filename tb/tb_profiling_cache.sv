// tb_profiling_cache: feeds one random access stream to the five profiling
// units (full size 4096 sets, 8 ways, 1-in-64 sampling) and compares each
// unit's access, miss and load-miss counts with a reference LRU model of a
// cache with 4096 >> k sets restricted to the sampled sets. The footprint
// (about 1.5 MB) is chosen so that the smaller units miss far more often than
// the large ones; the test also checks that ordering and the clear input.
module tb_profiling_cache;
  import edram_pkg::*;
  localparam int unsigned FULL = 4096, WAYS = 8, NU = 5, RATIO = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_valid = 0, acc_load = 0;
  paddr_t acc_addr = '0;
  logic [31:0] accesses [NU], misses [NU], load_misses [NU];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  profiling_cache dut (.*);

  typedef longint unsigned tagq_t[$];
  tagq_t model [NU][int];
  int m_acc[NU], m_miss[NU], m_lmiss[NU];

  task automatic model_access(input paddr_t a, input bit ld);
    for (int k = 0; k < NU; k++) begin
      int sets = FULL >> k;
      int set = int'((a >> OFFS_W) % sets);
      longint unsigned tag = a >> (OFFS_W + $clog2(sets));
      int pos;
      if (set % RATIO != 0) continue;
      m_acc[k]++;
      pos = -1;
      foreach (model[k][set][i]) if (model[k][set][i] == tag) pos = i;
      if (pos < 0) begin
        m_miss[k]++; if (ld) m_lmiss[k]++;
        if (model[k][set].size() == WAYS) void'(model[k][set].pop_back());
      end else model[k][set].delete(pos);
      model[k][set].push_front(tag);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (m_acc[k]) begin m_acc[k] = 0; m_miss[k] = 0; m_lmiss[k] = 0; end
      for (int i = 0; i < 60000; i++) begin
        paddr_t a;
        // lines of a 1.5 MB footprint; every access lands in a sampled set
        // half of the time so that the sampled sets see plenty of traffic
        a = paddr_t'($urandom_range(0, 24575)) << OFFS_W;
        if ($urandom_range(0, 1) == 0) a[OFFS_W +: 6] = '0;
        acc_valid = 1; acc_addr = a; acc_load = 1'($urandom);
        model_access(a, acc_load);
        @(negedge clk);
      end
      acc_valid = 0; @(negedge clk);
      for (int k = 0; k < NU; k++) begin
        check(accesses[k] == 32'(m_acc[k]), $sformatf("unit %0d accesses %0d vs %0d", k, accesses[k], m_acc[k]));
        check(misses[k] == 32'(m_miss[k]), $sformatf("unit %0d misses %0d vs %0d", k, misses[k], m_miss[k]));
        check(load_misses[k] == 32'(m_lmiss[k]), $sformatf("unit %0d load misses %0d vs %0d", k, load_misses[k], m_lmiss[k]));
      end
      for (int k = 1; k < NU; k++)
        check(misses[k] >= misses[k-1], "smaller emulated cache misses at least as often");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
