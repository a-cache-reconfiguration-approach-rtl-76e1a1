// interval_counters: the event counters that software reads once per interval
// to evaluate the energy model and choose the next configuration.
//
// Counted per interval (all cleared together by clear):
//   cycles        length of the interval in cycles (T = cycles / f)
//   l2_hits       H_L2, demand hits
//   l2_misses     M_L2, demand misses
//   l2_load_miss  load misses of the full cache (CPI-stack input)
//   dram_access   A_DRAM, memory reads and writebacks issued by the cache
//   refreshed     N_R, lines refreshed in all refresh-events of the interval
//   transitions   B, lines switched on or off by reconfiguration
//   active_sum    sum over cycles of the number of powered colors; divided by
//                 cycles x NUM_COLORS it gives the average active fraction F_A
// Each input is a per-cycle event or amount; counters wrap at 2^CNT_W (64 bits
// by default, which does not wrap in practice).
//
// The quantities come from the paper's energy model; the counter block itself
// and its widths are this design's own.
module interval_counters #(
  parameter int unsigned CNT_W   = 64,
  parameter int unsigned REF_W   = 2,
  parameter int unsigned ACT_W   = 7,
  parameter int unsigned TRANS_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               ev_hit,
  input  logic               ev_miss,
  input  logic               ev_load_miss,
  input  logic               ev_mem_access,
  input  logic [REF_W-1:0]   n_refreshed,
  input  logic               trans_valid,
  input  logic [TRANS_W-1:0] trans_lines,
  input  logic [ACT_W-1:0]   n_active,
  output logic [CNT_W-1:0]   cycles,
  output logic [CNT_W-1:0]   l2_hits,
  output logic [CNT_W-1:0]   l2_misses,
  output logic [CNT_W-1:0]   l2_load_miss,
  output logic [CNT_W-1:0]   dram_access,
  output logic [CNT_W-1:0]   refreshed,
  output logic [CNT_W-1:0]   transitions,
  output logic [CNT_W-1:0]   active_sum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles <= '0; l2_hits <= '0; l2_misses <= '0; l2_load_miss <= '0;
      dram_access <= '0; refreshed <= '0; transitions <= '0; active_sum <= '0;
    end else if (clear) begin
      cycles <= '0; l2_hits <= '0; l2_misses <= '0; l2_load_miss <= '0;
      dram_access <= '0; refreshed <= '0; transitions <= '0; active_sum <= '0;
    end else begin
      cycles       <= cycles + 1'b1;
      l2_hits      <= l2_hits + CNT_W'(ev_hit);
      l2_misses    <= l2_misses + CNT_W'(ev_miss);
      l2_load_miss <= l2_load_miss + CNT_W'(ev_load_miss);
      dram_access  <= dram_access + CNT_W'(ev_mem_access);
      refreshed    <= refreshed + CNT_W'(n_refreshed);
      transitions  <= transitions + (trans_valid ? CNT_W'(trans_lines) : '0);
      active_sum   <= active_sum + CNT_W'(n_active);
    end
  end

endmodule
