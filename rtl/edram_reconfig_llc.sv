// edram_reconfig_llc: a reconfigurable eDRAM last-level cache that saves
// leakage energy by powering off unused cache colors and refresh energy by
// refreshing only valid lines of the colors that stay on.
//
// Structure. The L2 (edram_l2_cache) is indexed through the region-to-color
// map (color_map_table), so software decides which colors a program may use.
// A refresh controller walks the powered colors every refresh period and
// refreshes valid lines only. Five profiling units watch the L2 access stream
// and count the misses and load misses that caches of 1X..X/16 the size would
// have; the nValid counter counts the valid lines; interval_counters collect
// hits, misses, memory accesses, refreshed lines, switched lines and the
// active fraction. Once per interval software reads all of these, runs the
// energy saving algorithm, stages a new map and color mask and pulses
// cfg_commit; reconfig_controller then flushes the lines that must go,
// switches the map and the power state, and counts the switched lines.
//
// Ports. cpu_* is the line-granular demand port from the level above
// (valid/ready, one request in flight, response after HIT_LATENCY cycles on a
// hit). mem_* is the line-granular port to main memory (valid/ready request,
// one-cycle read response). sw_* is the software register interface: shadow
// map writes, mask staging, commit, interval clear, and the size Lines(Cs)
// for which the refresh estimate min(nValid, Lines(Cs)) is wanted. color_on
// are the enables for the per-color power gates. The rest are counters and
// status for software.
//
// The parameters default to the paper's evaluated system: 2 MB, 8-way, 64 B
// lines, 4 KB pages (64 colors), two 1 MB banks, 12-cycle hit latency,
// 40 us refresh period at 2.2 GHz, five profiling units sampling 1 set in 64.
module edram_reconfig_llc
  import edram_pkg::*;
#(
  parameter int unsigned NUM_COLORS     = 64,
  parameter int unsigned WAYS           = 8,
  parameter int unsigned NUM_BANKS      = 2,
  parameter int unsigned HIT_LATENCY    = 12,
  parameter int unsigned REFRESH_PERIOD = 88000,
  parameter int unsigned NUM_PROF_UNITS = 5,
  parameter int unsigned SAMPLE_RATIO   = 64,
  parameter int unsigned COLOR_W        = $clog2(NUM_COLORS),
  parameter int unsigned SETS           = NUM_COLORS * (1 << SETS_PER_COLOR_W),
  parameter int unsigned LINES          = SETS * WAYS,
  parameter int unsigned NV_W           = $clog2(LINES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // demand port
  input  logic                  cpu_req_valid,
  output logic                  cpu_req_ready,
  input  paddr_t                cpu_req_addr,
  input  logic                  cpu_req_write,
  input  logic                  cpu_req_load,
  input  line_t                 cpu_req_wdata,
  output logic                  cpu_resp_valid,
  output logic                  cpu_resp_hit,
  output line_t                 cpu_resp_rdata,
  // main memory port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output paddr_t                mem_req_addr,
  output line_t                 mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  line_t                 mem_resp_rdata,
  // software interface
  input  logic                  sw_map_we,
  input  logic [COLOR_W-1:0]    sw_map_region,
  input  logic [COLOR_W-1:0]    sw_map_color,
  input  logic                  sw_mask_we,
  input  logic [NUM_COLORS-1:0] sw_mask,
  input  logic                  sw_commit,
  input  logic                  sw_clear,
  input  logic [NV_W-1:0]       sw_lines_cs,
  output logic                  sw_busy,
  output logic                  sw_error,
  // power gate enables
  output logic [NUM_COLORS-1:0] color_on,
  output logic [COLOR_W:0]      n_active,
  // valid-line count and refresh estimate
  output logic [NV_W-1:0]       n_valid,
  output logic [NV_W-1:0]       refresh_estimate,
  // interval counters
  output logic [63:0]           cnt_cycles,
  output logic [63:0]           cnt_hits,
  output logic [63:0]           cnt_misses,
  output logic [63:0]           cnt_load_misses,
  output logic [63:0]           cnt_dram,
  output logic [63:0]           cnt_refreshed,
  output logic [63:0]           cnt_transitions,
  output logic [63:0]           cnt_active_sum,
  // profiling counters, index k = cache size X / 2^k
  output logic [31:0]           prof_accesses    [NUM_PROF_UNITS],
  output logic [31:0]           prof_misses      [NUM_PROF_UNITS],
  output logic [31:0]           prof_load_misses [NUM_PROF_UNITS],
  // refresh status
  output logic                  refresh_walking,
  output logic                  refresh_overrun
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned REF_W = $clog2(NUM_BANKS + 1);

  // map table <-> cache
  logic [COLOR_W-1:0] map_region, map_color, flush_region, flush_color;
  logic               map_commit;
  // reconfiguration <-> cache
  logic                  flush_start, flush_done, flush_busy;
  logic [NUM_COLORS-1:0] flush_walk_mask, flush_keep_mask;
  // refresh <-> cache
  logic [SET_W-1:0]     scan_set [NUM_BANKS];
  logic [WAYS-1:0]      scan_valid [NUM_BANKS];
  logic [NUM_BANKS-1:0] ref_fire;
  logic [SET_W-1:0]     ref_set [NUM_BANKS];
  logic [WAY_W-1:0]     ref_way [NUM_BANKS];
  logic [REF_W-1:0]     n_refreshed;
  logic                 ref_event_start;
  // events
  logic ev_hit, ev_miss, ev_load_miss, ev_insert, ev_evict_valid, ev_mem_access;
  logic trans_valid;
  logic [31:0] trans_lines;
  logic nvalid_error;

  color_map_table #(.NUM_COLORS(NUM_COLORS)) u_map (
    .clk, .rst_n,
    .wr_en    (sw_map_we),
    .wr_region(sw_map_region),
    .wr_color (sw_map_color),
    .commit   (map_commit),
    .lk_region(map_region),
    .lk_color (map_color),
    .sh_region(flush_region),
    .sh_color (flush_color)
  );

  edram_l2_cache #(
    .NUM_COLORS (NUM_COLORS),
    .WAYS       (WAYS),
    .NUM_BANKS  (NUM_BANKS),
    .HIT_LATENCY(HIT_LATENCY)
  ) u_l2 (
    .clk, .rst_n,
    .req_valid (cpu_req_valid),
    .req_ready (cpu_req_ready),
    .req_addr  (cpu_req_addr),
    .req_write (cpu_req_write),
    .req_load  (cpu_req_load),
    .req_wdata (cpu_req_wdata),
    .resp_valid(cpu_resp_valid),
    .resp_hit  (cpu_resp_hit),
    .resp_rdata(cpu_resp_rdata),
    .map_region, .map_color,
    .flush_start, .flush_walk_mask, .flush_keep_mask,
    .flush_region, .flush_color, .flush_busy, .flush_done,
    .ref_scan_set  (scan_set),
    .ref_scan_valid(scan_valid),
    .ref_fire,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr,
    .mem_req_wdata, .mem_resp_valid, .mem_resp_rdata,
    .ev_hit, .ev_miss, .ev_load_miss, .ev_insert, .ev_evict_valid,
    .ev_mem_access
  );

  refresh_controller #(
    .NUM_COLORS    (NUM_COLORS),
    .WAYS          (WAYS),
    .NUM_BANKS     (NUM_BANKS),
    .REFRESH_PERIOD(REFRESH_PERIOD),
    .SETS_PER_COLOR(1 << SETS_PER_COLOR_W)
  ) u_refresh (
    .clk, .rst_n,
    .color_on,
    .scan_set, .scan_valid,
    .ref_fire, .ref_set, .ref_way,
    .n_refreshed,
    .event_start(ref_event_start),
    .walking    (refresh_walking),
    .overrun    (refresh_overrun)
  );

  nvalid_counter #(.MAX_LINES(LINES)) u_nvalid (
    .clk, .rst_n,
    .ins             (ev_insert),
    .evict           (ev_evict_valid),
    .lines_cs        (sw_lines_cs),
    .n_valid,
    .refresh_estimate,
    .error           (nvalid_error)
  );

  profiling_cache #(
    .FULL_SETS   (SETS),
    .WAYS        (WAYS),
    .NUM_UNITS   (NUM_PROF_UNITS),
    .SAMPLE_RATIO(SAMPLE_RATIO),
    .CNT_W       (32)
  ) u_prof (
    .clk, .rst_n,
    .clear      (sw_clear),
    .acc_valid  (cpu_req_valid && cpu_req_ready),
    .acc_addr   (cpu_req_addr),
    .acc_load   (cpu_req_load && !cpu_req_write),
    .accesses   (prof_accesses),
    .misses     (prof_misses),
    .load_misses(prof_load_misses)
  );

  logic cfg_error;
  reconfig_controller #(
    .NUM_COLORS     (NUM_COLORS),
    .LINES_PER_COLOR((1 << SETS_PER_COLOR_W) * WAYS),
    .TRANS_W        (32)
  ) u_reconfig (
    .clk, .rst_n,
    .cfg_mask_we(sw_mask_we),
    .cfg_mask   (sw_mask),
    .cfg_commit (sw_commit),
    .busy       (sw_busy),
    .cfg_error,
    .flush_start, .flush_walk_mask, .flush_keep_mask, .flush_done,
    .map_commit,
    .color_on,
    .n_active,
    .trans_valid, .trans_lines
  );

  assign sw_error = cfg_error || nvalid_error;

  interval_counters #(
    .CNT_W  (64),
    .REF_W  (REF_W),
    .ACT_W  (COLOR_W + 1),
    .TRANS_W(32)
  ) u_cnt (
    .clk, .rst_n,
    .clear        (sw_clear),
    .ev_hit, .ev_miss, .ev_load_miss, .ev_mem_access,
    .n_refreshed,
    .trans_valid, .trans_lines,
    .n_active,
    .cycles       (cnt_cycles),
    .l2_hits      (cnt_hits),
    .l2_misses    (cnt_misses),
    .l2_load_miss (cnt_load_misses),
    .dram_access  (cnt_dram),
    .refreshed    (cnt_refreshed),
    .transitions  (cnt_transitions),
    .active_sum   (cnt_active_sum)
  );

endmodule
