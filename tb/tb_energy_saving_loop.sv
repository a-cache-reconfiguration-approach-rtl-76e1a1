// tb_energy_saving_loop: closes the loop between the cache hardware and the
// per-interval energy saving algorithm, which in a real system is software.
// The testbench plays that software at the end of every interval:
//   - candidates: even color counts C with M/16 <= C <= M and |C - C_now| <= 16;
//   - misses and load misses at C from the five profiling units (scaled by the
//     sampling ratio), linearly interpolated between the profiled sizes
//     X, X/2, X/4, X/8, X/16 (the interpolation is this testbench's choice);
//   - run time T_C = (cycles - 154 x measured load misses) + 154 x load
//     misses at C, i.e. memory stall cycles linear in load misses, 154-cycle
//     memory; candidates more than 3% slower than the full cache are dropped;
//   - energy of each remaining candidate with the model and constants of the
//     method: eDRAM leakage 1.296 W / 8 x C/M x T, 0.648 nJ per hit, twice
//     that per miss, 0.648 nJ per refreshed line with min(nValid, Lines(C))
//     lines per 40 us, DRAM 0.18 W x T + 70 nJ per access, 2 pJ per switched
//     line; the cheapest candidate is applied (regions r -> r mod C, colors
//     0..C-1 powered).
// The workload has two phases: a 256 KB working set, then a 768 KB one. The
// test checks that the hardware follows every decision, that the algorithm
// shrinks the cache in the small phase and grows it in the large phase, that
// the step rules are kept, and that all data read back stays correct.
module tb_energy_saving_loop;
  import edram_pkg::*;

  localparam int unsigned NC = 64, LPC = 512, MEM_LAT = 154, RATIO = 64;
  localparam real FREQ = 2.2e9, T_REF = 40.0e-6;
  localparam real E_DYN = 0.648e-9, P_LEAK = 1.296 / 8.0, E_DRAM = 70.0e-9, P_DRAM = 0.18,
                  E_CHI = 2.0e-12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req_valid, cpu_req_ready, cpu_req_write, cpu_req_load, cpu_resp_valid, cpu_resp_hit;
  paddr_t cpu_req_addr;
  line_t cpu_req_wdata, cpu_resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  paddr_t mem_req_addr;
  line_t mem_req_wdata, mem_resp_rdata;
  logic sw_map_we, sw_mask_we, sw_commit, sw_clear, sw_busy, sw_error;
  logic [5:0] sw_map_region, sw_map_color;
  logic [NC-1:0] sw_mask, color_on;
  logic [6:0] n_active;
  logic [15:0] sw_lines_cs, n_valid, refresh_estimate;
  logic [63:0] cnt_cycles, cnt_hits, cnt_misses, cnt_load_misses, cnt_dram, cnt_refreshed,
               cnt_transitions, cnt_active_sum;
  logic [31:0] prof_accesses [5], prof_misses [5], prof_load_misses [5];
  logic refresh_walking, refresh_overrun;

  edram_reconfig_llc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------ memory
  line_t mem [paddr_t];
  line_t ref_data [paddr_t];
  function automatic line_t init_line(input paddr_t a);
    return {16{a[31:0] ^ 32'h0BAD_F00D}};
  endfunction
  int mem_cnt;
  logic mem_busy;
  paddr_t mem_addr_q;
  assign mem_req_ready = !mem_busy;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (!rst_n) mem_busy <= 1'b0;
    else if (mem_busy) begin
      if (mem_cnt == 0) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= mem.exists(mem_addr_q) ? mem[mem_addr_q] : init_line(mem_addr_q);
        mem_busy <= 1'b0;
      end else mem_cnt <= mem_cnt - 1;
    end else if (mem_req_valid) begin
      if (mem_req_write) mem[mem_req_addr] = mem_req_wdata;
      else begin mem_busy <= 1'b1; mem_cnt <= MEM_LAT - 2; mem_addr_q <= mem_req_addr; end
    end
  end

  task automatic access(input paddr_t a, input bit wr, input line_t wd, output line_t rd);
    cpu_req_addr <= a; cpu_req_write <= wr; cpu_req_load <= !wr; cpu_req_wdata <= wd;
    cpu_req_valid <= 1'b1;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 1'b0;
    do @(posedge clk); while (!cpu_resp_valid);
    rd = cpu_resp_rdata;
    @(negedge clk);
  endtask

  task automatic run_interval(input int n, input int ws_lines);
    paddr_t a;
    line_t d, rd;
    for (int i = 0; i < n; i++) begin
      a = (paddr_t'($urandom_range(0, ws_lines - 1)) << OFFS_W) | (paddr_t'(1) << 41);
      if ($urandom_range(0, 7) == 0) begin
        for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
        access(a, 1, d, rd);
        ref_data[a] = d;
      end else begin
        access(a, 0, '0, rd);
        check(rd == (ref_data.exists(a) ? ref_data[a] : init_line(a)), "read data");
      end
    end
  endtask

  // misses at C colors, interpolated between profiled sizes 64, 32, 16, 8, 4
  function automatic real at_size(input real v[5], input int c);
    int k;
    real hi_c, lo_c;
    if (c >= 64) return v[0];
    if (c <= 4) return v[4];
    k = 0;
    while ((64 >> (k + 1)) > c) k++;
    hi_c = real'(64 >> k); lo_c = real'(64 >> (k + 1));
    return v[k + 1] + (v[k] - v[k + 1]) * (real'(c) - lo_c) / (hi_c - lo_c);
  endfunction

  int c_now;
  task automatic decide(output int c_best);
    real mis[5], lmis[5], t_other, t0, best_e;
    real cyc, hits, nval;
    cyc = real'(cnt_cycles); hits = real'(cnt_hits); nval = real'(n_valid);
    for (int k = 0; k < 5; k++) begin
      mis[k]  = real'(prof_misses[k]) * RATIO;
      lmis[k] = real'(prof_load_misses[k]) * RATIO;
    end
    t_other = cyc - MEM_LAT * real'(cnt_load_misses);
    t0 = t_other + MEM_LAT * lmis[0];
    best_e = 1.0e30; c_best = c_now;
    for (int c = 4; c <= NC; c += 2) begin
      real t, delta, m, acc, e, secs, nref;
      if (c > c_now + 16 || c < c_now - 16) continue;
      t = t_other + MEM_LAT * at_size(lmis, c);
      delta = (t - t0) / t0 * 100.0;
      if (delta > 3.0) continue;
      m = at_size(mis, c);
      acc = real'(prof_accesses[0]) * RATIO;
      secs = t / FREQ;
      nref = ((nval < real'(c * LPC)) ? nval : real'(c * LPC)) * (secs / T_REF);
      e = P_LEAK * (real'(c) / NC) * secs + E_DYN * (2.0 * m + (acc - m)) + nref * E_DYN
          + P_DRAM * secs + E_DRAM * m + E_CHI * real'(((c > c_now) ? c - c_now : c_now - c) * LPC);
      if (e < best_e) begin best_e = e; c_best = c; end
    end
  endtask

  task automatic apply(input int c);
    for (int r = 0; r < NC; r++) begin
      @(negedge clk); sw_map_we = 1; sw_map_region = 6'(r); sw_map_color = 6'(r % c);
    end
    @(negedge clk); sw_map_we = 0; sw_mask_we = 1;
    sw_mask = (c == NC) ? '1 : ((64'(1) << c) - 1);
    @(negedge clk); sw_mask_we = 0; sw_commit = 1; @(negedge clk); sw_commit = 0;
    while (sw_busy) @(negedge clk);
    check(n_active == 7'(c), $sformatf("hardware runs %0d colors", c));
    check(!sw_error, "no error");
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c_min_small, c_end_large, c_next;
    cpu_req_valid = 0; cpu_req_addr = '0; cpu_req_write = 0; cpu_req_load = 0; cpu_req_wdata = '0;
    sw_map_we = 0; sw_mask_we = 0; sw_commit = 0; sw_clear = 0; sw_map_region = '0;
    sw_map_color = '0; sw_mask = '1; sw_lines_cs = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c_now = NC;
    c_min_small = NC;
    // phase 1: 4096-line (256 KB) working set
    for (int iv = 0; iv < 6; iv++) begin
      @(negedge clk); sw_clear = 1; @(negedge clk); sw_clear = 0;
      run_interval(6000, 4096);
      decide(c_next);
      $display("interval %0d (256 KB): %0d -> %0d colors", iv, c_now, c_next);
      check(c_next % 2 == 0 && c_next >= NC / 16 && c_next <= NC, "candidate rules");
      check((c_next > c_now ? c_next - c_now : c_now - c_next) <= 16, "at most 16 colors change");
      if (c_next != c_now) apply(c_next);
      c_now = c_next;
      if (c_now < c_min_small) c_min_small = c_now;
    end
    check(c_min_small <= 32, $sformatf("small working set shrank the cache to %0d colors", c_min_small));
    // phase 2: 12288-line (768 KB) working set
    for (int iv = 0; iv < 6; iv++) begin
      @(negedge clk); sw_clear = 1; @(negedge clk); sw_clear = 0;
      run_interval(12000, 12288);
      decide(c_next);
      $display("interval %0d (768 KB): %0d -> %0d colors", iv, c_now, c_next);
      check(c_next % 2 == 0 && c_next >= NC / 16 && c_next <= NC, "candidate rules");
      check((c_next > c_now ? c_next - c_now : c_now - c_next) <= 16, "at most 16 colors change");
      if (c_next != c_now) apply(c_next);
      c_now = c_next;
    end
    c_end_large = c_now;
    check(c_end_large > c_min_small, $sformatf("large working set grew the cache to %0d colors", c_end_large));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
