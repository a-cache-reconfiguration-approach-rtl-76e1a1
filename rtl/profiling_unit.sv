// profiling_unit: a set-sampled auxiliary tag directory that estimates how
// many misses (and load misses) a cache of a given size would have.
//
// It emulates an ordinary (uncolored) WAYS-way LRU cache with FULL_SETS >>
// SIZE_SHIFT sets, i.e. 1X, X/2, X/4, X/8 or X/16 of the L2 for SIZE_SHIFT =
// 0..4. Only one set in SAMPLE_RATIO is kept (sets whose index has its low
// log2(SAMPLE_RATIO) bits at zero), and only tags are stored, no data. Every
// L2 access is offered on acc_valid/acc_addr/acc_load; accesses to an unsampled
// set are ignored. For a sampled access the unit looks up its tags, updates
// LRU, allocates on a miss and counts the access, the miss and, for loads, the
// load miss. Counts are sampled counts: software multiplies by SAMPLE_RATIO.
// clear zeroes the counters at the start of an interval (the tags stay).
//
// Timing: one access per cycle, counters update on the next clock edge.
//
// Paper vs. this design: five units of sizes 1X..X/16, set sampling with a
// ratio such as 1/64, tag-only storage and the extra load-miss counters follow
// the paper. Which sets are sampled, the LRU policy of the unit, the full tag
// width (30 bits at 1X with a 48-bit address) and the 32-bit counters are this
// design's choices.
module profiling_unit
  import edram_pkg::*;
#(
  parameter int unsigned FULL_SETS    = 4096,
  parameter int unsigned WAYS         = 8,
  parameter int unsigned SIZE_SHIFT   = 0,
  parameter int unsigned SAMPLE_RATIO = 64,
  parameter int unsigned CNT_W        = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             acc_valid,
  input  paddr_t           acc_addr,
  input  logic             acc_load,
  output logic [CNT_W-1:0] accesses,
  output logic [CNT_W-1:0] misses,
  output logic [CNT_W-1:0] load_misses
);

  localparam int unsigned SETS    = FULL_SETS >> SIZE_SHIFT;
  localparam int unsigned SET_W   = $clog2(SETS);
  localparam int unsigned SAMP_W  = $clog2(SAMPLE_RATIO);
  localparam int unsigned NSAMP   = (SETS / SAMPLE_RATIO) > 0 ? SETS / SAMPLE_RATIO : 1;
  localparam int unsigned SIDX_W  = (NSAMP > 1) ? $clog2(NSAMP) : 1;
  localparam int unsigned TAG_W   = PADDR_W - OFFS_W - SET_W;
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [TAG_W-1:0]  tag_q   [NSAMP][WAYS];
  logic [WAYS-1:0]   valid_q [NSAMP];
  logic [WAY_W-1:0]  age_q   [NSAMP][WAYS];

  logic [SET_W-1:0]  set_idx;
  logic [TAG_W-1:0]  tag;
  logic [SIDX_W-1:0] sidx;
  logic              sampled;

  assign set_idx = acc_addr[OFFS_W +: SET_W];
  assign tag     = acc_addr[PADDR_W-1 -: TAG_W];
  assign sampled = (set_idx[SAMP_W-1:0] == '0);
  assign sidx    = SIDX_W'(set_idx >> SAMP_W);

  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  always_comb begin
    hit = 1'b0; hit_way = '0; victim = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (age_q[sidx][w] == WAY_W'(WAYS-1)) victim = WAY_W'(w);
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (!valid_q[sidx][w]) victim = WAY_W'(w);
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (valid_q[sidx][w] && tag_q[sidx][w] == tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
    end
  end

  logic [WAY_W-1:0] use_way;
  assign use_way = hit ? hit_way : victim;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      accesses <= '0; misses <= '0; load_misses <= '0;
      for (int s = 0; s < NSAMP; s++) begin
        valid_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) age_q[s][w] <= WAY_W'(w);
      end
    end else begin
      if (clear) begin
        accesses <= '0; misses <= '0; load_misses <= '0;
      end else if (acc_valid && sampled) begin
        accesses <= accesses + 1'b1;
        if (!hit) begin
          misses <= misses + 1'b1;
          if (acc_load) load_misses <= load_misses + 1'b1;
        end
      end
      if (acc_valid && sampled) begin
        for (int w = 0; w < WAYS; w++) begin
          if (age_q[sidx][w] < age_q[sidx][use_way]) age_q[sidx][w] <= age_q[sidx][w] + 1'b1;
        end
        age_q[sidx][use_way] <= '0;
        if (!hit) begin
          valid_q[sidx][use_way] <= 1'b1;
          tag_q[sidx][use_way]   <= tag;
        end
      end
    end
  end

endmodule
