// profiling_cache: the five profiling units that estimate the miss and load
// miss counts of the L2 at 1X, X/2, X/4, X/8 and X/16 of its size.
//
// All units see the same L2 access stream and work in parallel, one access per
// cycle. Unit k (k = 0..4) emulates a cache with FULL_SETS >> k sets and the
// L2's associativity, sampling one set in SAMPLE_RATIO. Software reads the
// counters at the end of an interval, scales them by SAMPLE_RATIO, turns load
// misses into memory stall cycles through the CPI stack and so estimates the
// run time at each size; clear starts the next interval. Counter outputs are
// arrays indexed by k, so index 0 is the full-size estimate.
//
// The five sizes, sampling and load-miss counting follow the paper; the
// counter width is this design's own.
module profiling_cache
  import edram_pkg::*;
#(
  parameter int unsigned FULL_SETS    = 4096,
  parameter int unsigned WAYS         = 8,
  parameter int unsigned NUM_UNITS    = 5,
  parameter int unsigned SAMPLE_RATIO = 64,
  parameter int unsigned CNT_W        = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             acc_valid,
  input  paddr_t           acc_addr,
  input  logic             acc_load,
  output logic [CNT_W-1:0] accesses    [NUM_UNITS],
  output logic [CNT_W-1:0] misses      [NUM_UNITS],
  output logic [CNT_W-1:0] load_misses [NUM_UNITS]
);

  for (genvar k = 0; k < NUM_UNITS; k++) begin : g_unit
    profiling_unit #(
      .FULL_SETS   (FULL_SETS),
      .WAYS        (WAYS),
      .SIZE_SHIFT  (k),
      .SAMPLE_RATIO(SAMPLE_RATIO),
      .CNT_W       (CNT_W)
    ) u_unit (
      .clk, .rst_n, .clear, .acc_valid, .acc_addr, .acc_load,
      .accesses   (accesses[k]),
      .misses     (misses[k]),
      .load_misses(load_misses[k])
    );
  end

endmodule
