// tb_edram_reconfig_llc: end-to-end test of the whole cache at its default,
// full size (2 MB, 8 ways, 64 colors, 40 us = 88,000-cycle refresh period,
// 154-cycle main memory).
//
// The testbench plays the level above the cache (random line reads and
// writes over a hot and a cold footprint), main memory (fixed latency, with a
// reference copy of every line written) and the software that reconfigures
// the cache once per interval. It runs three intervals:
//   1. full cache (64 colors);
//   2. shrink by 16 colors (the largest step the algorithm allows), regions of
//      the turned-off colors remapped onto colors that stay on;
//   3. grow back to 64 colors with the identity map.
// In each interval it checks all read data against the reference, waits for a
// refresh-event with the traffic paused and checks that the event refreshed
// exactly nValid lines (valid-only refresh of powered colors), checks the
// hit/miss/DRAM/transition counters against its own counts, and checks the
// 12-cycle hit latency. Every mechanism of the design is counted and must
// occur: hits, misses, dirty writebacks, refresh-events, a demand access
// stalled by refresh, a shrinking and a growing reconfiguration, flush
// writebacks, and profiling-unit counts.
module tb_edram_reconfig_llc;
  import edram_pkg::*;

  localparam int unsigned NC = 64, WAYS = 8, LPC = 512, LINES = NC * LPC;
  localparam int unsigned LAT = 12, MEM_LAT = 154, PERIOD = 88000;

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
    return {16{a[31:0] ^ 32'h5EED_0000}};
  endfunction
  int mem_cnt, n_mem_wr, n_mem_rd, n_mem_wr_total = 0;
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
      if (mem_req_write) begin mem[mem_req_addr] = mem_req_wdata; n_mem_wr++; n_mem_wr_total++; end
      else begin mem_busy <= 1'b1; mem_cnt <= MEM_LAT - 2; mem_addr_q <= mem_req_addr; n_mem_rd++; end
    end
  end

  // ------------------------------------------------------------ mechanisms
  int n_hits, n_misses, n_refresh_events, n_refresh_stall, n_shrink, n_grow, n_flush_wb;
  int n_events_seen;
  always @(posedge clk) if (rst_n && dut.u_refresh.event_start) n_refresh_events++;
  // a lookup that had to wait because refresh held its bank
  always @(posedge clk)
    if (rst_n && dut.u_l2.state_q == dut.u_l2.S_LOOKUP && !dut.u_l2.lk_bank_free) n_refresh_stall++;

  // ------------------------------------------------------------ CPU side
  int lat_seen;
  bit hit_seen;
  line_t rd_seen;
  task automatic access(input paddr_t a, input bit wr, input line_t wd);
    int t;
    cpu_req_addr <= a; cpu_req_write <= wr; cpu_req_load <= !wr; cpu_req_wdata <= wd;
    cpu_req_valid <= 1'b1;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    cpu_req_valid <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!cpu_resp_valid);
    lat_seen = t; hit_seen = cpu_resp_hit; rd_seen = cpu_resp_rdata;
    @(negedge clk);
    if (hit_seen) n_hits++; else n_misses++;
  endtask

  task automatic traffic(input int n);
    paddr_t a;
    line_t d;
    for (int i = 0; i < n; i++) begin
      // hot footprint of 4096 lines, cold footprint of 65536 lines (4 MB)
      if ($urandom_range(0, 2) != 0) a = paddr_t'($urandom_range(0, 4095)) << OFFS_W;
      else a = paddr_t'($urandom_range(0, 65535)) << OFFS_W;
      a[40] = 1'b1;   // keep away from address zero
      if ($urandom_range(0, 3) == 0) begin
        for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
        access(a, 1, d);
        ref_data[a] = d;
      end else begin
        access(a, 0, '0);
        check(rd_seen == (ref_data.exists(a) ? ref_data[a] : init_line(a)),
              $sformatf("read data at %h", a));
        if (hit_seen && !refresh_walking) check(lat_seen == LAT, $sformatf("hit latency %0d", lat_seen));
      end
    end
  endtask

  // write 12 lines into one set (same region and set, different tags), so
  // that dirty victims must be written back, then read them all back
  task automatic conflict_burst(input paddr_t base);
    line_t d;
    for (int i = 0; i < 12; i++) begin
      paddr_t a = base + (paddr_t'(i) << 18);
      for (int k = 0; k < 16; k++) d[k*32 +: 32] = $urandom;
      access(a, 1, d);
      ref_data[a] = d;
    end
    for (int i = 0; i < 12; i++) begin
      paddr_t a = base + (paddr_t'(i) << 18);
      access(a, 0, '0);
      check(rd_seen == ref_data[a], "conflict burst read-back");
    end
  endtask

  // let a refresh-event run with the traffic paused; it must refresh exactly
  // the valid lines
  task automatic quiet_refresh_event();
    longint nr_start;
    while (refresh_walking) @(negedge clk);
    nr_start = longint'(cnt_refreshed);
    while (!refresh_walking) @(negedge clk);
    while (refresh_walking) @(negedge clk);
    check(longint'(cnt_refreshed) - nr_start == longint'(n_valid),
          $sformatf("event refreshed %0d lines, nValid %0d", longint'(cnt_refreshed) - nr_start, n_valid));
    check(int'(n_valid) < int'(n_active) * LPC + 1, "valid lines fit in the powered colors");
  endtask

  // issue hits while the refresh walk is running to see the stall
  task automatic traffic_during_walk();
    while (!refresh_walking) @(negedge clk);
    for (int i = 0; i < 200 && refresh_walking; i++) begin
      paddr_t a = paddr_t'(i % 64) << OFFS_W;
      a[40] = 1'b1;
      access(a, 0, '0);
      check(rd_seen == (ref_data.exists(a) ? ref_data[a] : init_line(a)), "read during walk");
    end
  endtask

  task automatic reconfigure(input logic [NC-1:0] mask, input int map_off_to);
    // regions of turned-off colors go to colors (r mod map_off_to), others stay
    int wb_before;
    for (int r = 0; r < NC; r++) begin
      @(negedge clk);
      sw_map_we = 1; sw_map_region = 6'(r);
      sw_map_color = mask[r] ? 6'(r) : 6'(r % map_off_to);
    end
    @(negedge clk); sw_map_we = 0; sw_mask_we = 1; sw_mask = mask;
    @(negedge clk); sw_mask_we = 0;
    wb_before = n_mem_wr;
    sw_commit = 1; @(negedge clk); sw_commit = 0;
    check(sw_busy, "reconfiguration busy");
    while (sw_busy) @(negedge clk);
    @(negedge clk);
    n_flush_wb += n_mem_wr - wb_before;
    check(color_on == mask, "power state follows the mask");
    check(!sw_error, "no error");
  endtask

  task automatic check_counters(input string tag);
    check(cnt_hits == 64'(n_hits), {tag, ": hit counter"});
    check(cnt_misses == 64'(n_misses), {tag, ": miss counter"});
    check(cnt_dram == 64'(n_mem_wr + n_mem_rd), {tag, ": DRAM access counter"});
    check(prof_accesses[0] > 0 && prof_misses[4] >= prof_misses[0], {tag, ": profiling counts"});
  endtask

  task automatic clear_interval();
    @(negedge clk); sw_clear = 1; @(negedge clk); sw_clear = 0;
    n_hits = 0; n_misses = 0; n_mem_wr = 0; n_mem_rd = 0;
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpu_req_valid = 0; cpu_req_addr = '0; cpu_req_write = 0; cpu_req_load = 0; cpu_req_wdata = '0;
    sw_map_we = 0; sw_mask_we = 0; sw_commit = 0; sw_clear = 0; sw_map_region = '0;
    sw_map_color = '0; sw_mask = '1; sw_lines_cs = 16'(LINES / 2);
    n_hits = 0; n_misses = 0; n_mem_wr = 0; n_mem_rd = 0; n_refresh_stall = 0;
    n_shrink = 0; n_grow = 0; n_flush_wb = 0; n_refresh_events = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(n_active == 7'd64 && n_valid == 0, "reset: full cache, empty");

    // ---- interval 1: full cache
    clear_interval();
    traffic(6000);
    conflict_burst(48'h0100_0000_1240);
    check_counters("interval 1");
    check(refresh_estimate == ((n_valid < sw_lines_cs) ? n_valid : sw_lines_cs), "R = min(nValid, Lines)");
    quiet_refresh_event();
    traffic_during_walk();

    // ---- interval 2: turn off colors 48..63, their regions onto colors 0..15
    clear_interval();
    reconfigure({16'h0000, 48'hFFFF_FFFF_FFFF}, 16);
    n_shrink++;
    check(cnt_transitions == 64'(16 * LPC), "B counts 16 colors of lines");
    check(n_active == 7'd48, "48 colors active");
    n_mem_wr = 0; n_mem_rd = 0;
    sw_clear = 1; @(negedge clk); sw_clear = 0;
    traffic(6000);
    conflict_burst(48'h0200_0000_F080);
    check_counters("interval 2");
    quiet_refresh_event();
    check(int'(n_valid) <= 48 * LPC, "valid lines within 48 colors");

    // ---- interval 3: back to the full cache
    clear_interval();
    reconfigure('1, 1);
    n_grow++;
    check(cnt_transitions == 64'(16 * LPC), "B counts 16 colors switched on");
    n_mem_wr = 0; n_mem_rd = 0;
    sw_clear = 1; @(negedge clk); sw_clear = 0;
    traffic(4000);
    check_counters("interval 3");
    // every line ever written must read back correctly
    foreach (ref_data[k]) begin
      access(k, 0, '0);
      check(rd_seen == ref_data[k], $sformatf("final read-back at %h", k));
    end
    check(cnt_active_sum > 0, "active fraction accumulates");
    check(!refresh_overrun && !sw_error, "no overrun, no error");

    $display("mechanisms: hits=%0d misses=%0d eviction_writebacks=%0d refresh_events=%0d refresh_stalls=%0d shrink=%0d grow=%0d flush_writebacks=%0d prof_acc=%0d",
             n_hits, n_misses, n_mem_wr_total - n_flush_wb, n_refresh_events, n_refresh_stall, n_shrink, n_grow, n_flush_wb, prof_accesses[0]);
    check(n_hits > 0, "hits happened");
    check(n_misses > 0, "misses happened");
    check(n_mem_wr_total - n_flush_wb > 0, "dirty victims were written back");
    check(n_refresh_events >= 3, "refresh-events happened");
    check(n_refresh_stall > 0, "a demand access was stalled by refresh");
    check(n_shrink > 0 && n_grow > 0, "both reconfiguration directions happened");
    check(n_flush_wb > 0, "the flush wrote back dirty lines");
    check(prof_accesses[0] > 0, "profiling units sampled accesses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
