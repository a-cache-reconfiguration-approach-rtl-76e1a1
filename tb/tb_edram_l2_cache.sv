// tb_edram_l2_cache: self-checking test of the colored L2 cache on a reduced
// geometry (8 colors x 64 sets x 4 ways, two banks).
//
// The testbench supplies the live and shadow color maps, a main memory with a
// fixed latency and a reference copy of memory contents. It checks:
//   - read data against the reference after random reads and writes that
//     overflow the cache (evictions and dirty writebacks);
//   - that a repeated access to a line just filled is a hit answered exactly
//     HIT_LATENCY cycles after the handshake when no refresh interferes;
//   - that random refresh cycles (ref_fire) stall but never corrupt;
//   - a reconfiguration flush that turns colors off and remaps regions: all
//     dirty data reaches memory, no dropped line stays valid, surviving lines
//     stay readable as hits, and valid-line bookkeeping (insert minus evict
//     events) matches the number of valid lines seen through the scan port.
module tb_edram_l2_cache;
  import edram_pkg::*;

  localparam int unsigned NC = 8, WAYS = 4, NB = 2, LAT = 12, MEM_LAT = 20;
  localparam int unsigned CW = $clog2(NC), SET_W = CW + SETS_PER_COLOR_W;
  localparam int unsigned SETS = 1 << SET_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_write, req_load, resp_valid, resp_hit;
  paddr_t req_addr;
  line_t req_wdata, resp_rdata;
  logic [CW-1:0] map_region, map_color, flush_region, flush_color;
  logic flush_start, flush_busy, flush_done;
  logic [NC-1:0] walk_mask, keep_mask;
  logic [SET_W-1:0] scan_set [NB];
  logic [WAYS-1:0] scan_valid [NB];
  logic [NB-1:0] ref_fire;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  paddr_t mem_req_addr;
  line_t mem_req_wdata, mem_resp_rdata;
  logic ev_hit, ev_miss, ev_load_miss, ev_insert, ev_evict_valid, ev_mem_access;

  edram_l2_cache #(.NUM_COLORS(NC), .WAYS(WAYS), .NUM_BANKS(NB), .HIT_LATENCY(LAT)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_write, .req_load, .req_wdata,
    .resp_valid, .resp_hit, .resp_rdata, .map_region, .map_color,
    .flush_start, .flush_walk_mask(walk_mask), .flush_keep_mask(keep_mask),
    .flush_region, .flush_color, .flush_busy, .flush_done,
    .ref_scan_set(scan_set), .ref_scan_valid(scan_valid), .ref_fire,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .ev_hit, .ev_miss, .ev_load_miss, .ev_insert, .ev_evict_valid, .ev_mem_access);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------ color maps
  logic [CW-1:0] live_map [NC];
  logic [CW-1:0] shadow_map [NC];
  assign map_color   = live_map[map_region];
  assign flush_color = shadow_map[flush_region];

  // ------------------------------------------------------------ memory
  line_t mem [paddr_t];       // backing store (what memory holds)
  line_t ref_data [paddr_t];  // what a read must return
  function automatic line_t init_line(input paddr_t a);
    return {16{a[31:0] ^ 32'hA5A5_0000}};
  endfunction
  function automatic line_t mem_get(input paddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  int mem_cnt;
  logic mem_busy;
  paddr_t mem_addr_q;
  assign mem_req_ready = !mem_busy;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (!rst_n) begin
      mem_busy <= 1'b0;
    end else if (mem_busy) begin
      if (mem_cnt == 0) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= mem_get(mem_addr_q);
        mem_busy <= 1'b0;
      end else mem_cnt <= mem_cnt - 1;
    end else if (mem_req_valid) begin
      if (mem_req_write) mem[mem_req_addr] = mem_req_wdata;
      else begin mem_busy <= 1'b1; mem_cnt <= MEM_LAT; mem_addr_q <= mem_req_addr; end
    end
  end

  // ------------------------------------------------------------ refresh noise
  bit ref_noise = 0;
  always @(posedge clk) ref_fire <= ref_noise ? NB'($urandom_range(0, 3) == 0 ? $urandom : 0) : '0;

  // valid-line bookkeeping
  int nvalid = 0;
  always @(posedge clk) if (rst_n) nvalid <= nvalid + int'(ev_insert) - int'(ev_evict_valid);

  // ------------------------------------------------------------ access task
  int lat_seen;
  bit hit_seen;
  line_t rd_seen;
  task automatic access(input paddr_t a, input bit wr, input line_t wd);
    int t;
    req_addr <= a; req_write <= wr; req_load <= !wr; req_wdata <= wd; req_valid <= 1'b1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!resp_valid);
    lat_seen = t; hit_seen = resp_hit; rd_seen = resp_rdata;
    @(negedge clk);
  endtask

  function automatic paddr_t rand_addr(input int nlines);
    // lines spread over all regions and a few tags; nlines bounds the footprint
    int unsigned l = $urandom_range(0, nlines - 1);
    return paddr_t'(l) << OFFS_W;
  endfunction

  int scan_total;
  task automatic count_valid();
    scan_total = 0;
    for (int s = 0; s < SETS / NB; s++) begin
      for (int b = 0; b < NB; b++) scan_set[b] = SET_W'(b * (SETS / NB) + s);
      #1;
      for (int b = 0; b < NB; b++) scan_total += $countones(scan_valid[b]);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    paddr_t a;
    line_t d;
    int hits, misses;
    for (int i = 0; i < NC; i++) begin live_map[i] = CW'(i); shadow_map[i] = CW'(i); end
    req_valid = 0; req_addr = '0; req_write = 0; req_load = 0; req_wdata = '0;
    flush_start = 0; walk_mask = '1; keep_mask = '1;
    for (int b = 0; b < NB; b++) scan_set[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. miss then hit with exact latency
    a = 48'h1234_5678_9A40;
    access(a, 0, '0);
    check(!hit_seen, "first access misses");
    check(rd_seen == init_line(a), "miss returns memory data");
    access(a, 0, '0);
    check(hit_seen, "second access hits");
    check(lat_seen == LAT, $sformatf("hit latency %0d, expected %0d", lat_seen, LAT));

    // 2. random traffic over 4x the capacity, with refresh interference
    ref_noise = 1;
    hits = 0; misses = 0;
    for (int i = 0; i < 6000; i++) begin
      a = rand_addr(4 * SETS * WAYS);
      if ($urandom_range(0, 2) == 0) begin
        d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
             $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        access(a, 1, d);
        ref_data[a] = d;
      end else begin
        access(a, 0, '0);
        check(rd_seen == (ref_data.exists(a) ? ref_data[a] : init_line(a)),
              $sformatf("read data at %h", a));
      end
      if (hit_seen) hits++; else misses++;
      if (hit_seen) check(lat_seen >= LAT, "hit never faster than HIT_LATENCY");
    end
    check(hits > 100 && misses > 100, $sformatf("mix of hits %0d and misses %0d", hits, misses));
    ref_noise = 0;
    repeat (2) @(posedge clk);
    count_valid();
    check(scan_total == nvalid, $sformatf("valid lines %0d vs insert-evict %0d", scan_total, nvalid));

    // 3. reconfiguration: turn colors 4..7 off, regions 4..7 -> colors 0..3,
    //    region 1 -> color 2 (remap inside colors that stay on)
    for (int r = 0; r < NC; r++) shadow_map[r] = CW'(r % 4);
    shadow_map[1] = 2;
    walk_mask = '1; keep_mask = 8'h0F;
    @(negedge clk); flush_start = 1; @(negedge clk); flush_start = 0;
    check(flush_busy, "flush busy after start");
    check(!req_ready, "no demand accepted during flush");
    while (!flush_done) @(posedge clk);
    @(negedge clk);
    for (int r = 0; r < NC; r++) live_map[r] = shadow_map[r];
    count_valid();
    check(scan_total == nvalid, $sformatf("after flush: valid %0d vs bookkeeping %0d", scan_total, nvalid));
    // no valid line in a powered-off color
    begin
      int off_valid = 0;
      for (int s = 0; s < SETS / NB; s++) begin
        for (int b = 0; b < NB; b++) scan_set[b] = SET_W'(b * (SETS / NB) + s);
        #1;
        for (int b = 0; b < NB; b++)
          if ((b * (SETS / NB) + s) / 64 >= 4) off_valid += $countones(scan_valid[b]);
      end
      check(off_valid == 0, $sformatf("%0d valid lines left in turned-off colors", off_valid));
    end
    // every written line must now be in memory or still cached: read all back
    foreach (ref_data[k]) begin
      access(k, 0, '0);
      check(rd_seen == ref_data[k], $sformatf("data after reconfiguration at %h", k));
    end
    // region 0 lines that were cached in color 0 must have survived: touch twice
    a = 48'h0000_0040;
    access(a, 0, '0);
    access(a, 0, '0);
    check(hit_seen, "line of an unchanged region hits again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
