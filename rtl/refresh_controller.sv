// refresh_controller: valid-only refresh of the powered-on part of the eDRAM
// cache.
//
// What it does. Every REFRESH_PERIOD cycles a refresh-event starts. During an
// event each bank walks its own sets in order. For a set whose color is
// powered on, the controller reads the set's valid bits from the cache and
// then refreshes exactly the valid ways, one line per cycle per bank; invalid
// lines and whole sets of powered-off colors get no refresh. All banks walk at
// once. An event that is still running when the next period starts is reported
// through overrun (it cannot happen at the default sizes: a bank has 2048 sets
// and 16384 lines against an 88,000-cycle period).
//
// Timing. A set costs one cycle to read its valid bits plus one cycle per
// valid line, and at least two cycles in all (an empty set or a set of a
// powered-off color costs two). ref_fire[b] is high in each cycle in which bank b refreshes line
// (ref_set[b], ref_way[b]); the cache gives that bank to the refresh in that
// cycle. ref_fire comes from registers only. n_refreshed is the number of
// lines refreshed in the current cycle (0..NUM_BANKS), for the N_R counter.
// event_start pulses when an event begins, walking is high while it runs.
//
// Paper vs. this design: refreshing only valid lines of the active colors, the
// per-bank refresh logic that refreshes one line per cycle, 1 MB banks and the
// 40 us period (88,000 cycles at 2.2 GHz) follow the paper. The set-by-set
// walk order and the one-cycle cost of reading a set's valid bits are this
// design's choices.
module refresh_controller #(
  parameter int unsigned NUM_COLORS     = 64,
  parameter int unsigned WAYS           = 8,
  parameter int unsigned NUM_BANKS      = 2,
  parameter int unsigned REFRESH_PERIOD = 88000,
  parameter int unsigned SETS_PER_COLOR = 64,
  parameter int unsigned COLOR_W        = $clog2(NUM_COLORS),
  parameter int unsigned SET_W          = $clog2(NUM_COLORS * SETS_PER_COLOR),
  parameter int unsigned WAY_W          = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NUM_COLORS-1:0]   color_on,
  output logic [SET_W-1:0]        scan_set [NUM_BANKS],
  input  logic [WAYS-1:0]         scan_valid [NUM_BANKS],
  output logic [NUM_BANKS-1:0]    ref_fire,
  output logic [SET_W-1:0]        ref_set [NUM_BANKS],
  output logic [WAY_W-1:0]        ref_way [NUM_BANKS],
  output logic [$clog2(NUM_BANKS+1)-1:0] n_refreshed,
  output logic                    event_start,
  output logic                    walking,
  output logic                    overrun
);

  localparam int unsigned SETS      = NUM_COLORS * SETS_PER_COLOR;
  localparam int unsigned BANK_SETS = SETS / NUM_BANKS;
  localparam int unsigned LSET_W    = $clog2(BANK_SETS);

  logic [$clog2(REFRESH_PERIOD)-1:0] period_q;
  logic                  tick;
  logic [NUM_BANKS-1:0]  busy_q;
  logic [LSET_W-1:0]     lset_q  [NUM_BANKS];
  logic [WAYS-1:0]       pend_q  [NUM_BANKS];
  logic [NUM_BANKS-1:0]  loaded_q;

  assign tick    = (32'(period_q) == REFRESH_PERIOD - 1);
  assign walking = |busy_q;

  function automatic logic [WAY_W-1:0] lowest(input logic [WAYS-1:0] v);
    lowest = '0;
    for (int w = WAYS-1; w >= 0; w--) if (v[w]) lowest = WAY_W'(w);
  endfunction

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      scan_set[b] = SET_W'(b * BANK_SETS) + SET_W'(lset_q[b]);
      ref_set[b]  = scan_set[b];
      ref_way[b]  = lowest(pend_q[b]);
      ref_fire[b] = busy_q[b] && loaded_q[b] && (pend_q[b] != '0);
    end
    n_refreshed = '0;
    for (int b = 0; b < NUM_BANKS; b++) n_refreshed += $bits(n_refreshed)'(ref_fire[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      period_q    <= '0;
      busy_q      <= '0;
      loaded_q    <= '0;
      event_start <= 1'b0;
      overrun     <= 1'b0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        lset_q[b] <= '0;
        pend_q[b] <= '0;
      end
    end else begin
      event_start <= 1'b0;
      period_q    <= tick ? '0 : period_q + 1'b1;
      if (tick) begin
        if (|busy_q) overrun <= 1'b1;
        event_start <= 1'b1;
        busy_q   <= '1;
        loaded_q <= '0;
        for (int b = 0; b < NUM_BANKS; b++) begin
          lset_q[b] <= '0;
          pend_q[b] <= '0;
        end
      end else begin
        for (int b = 0; b < NUM_BANKS; b++) begin
          if (busy_q[b]) begin
            if (!loaded_q[b]) begin
              // read the set's valid bits; powered-off colors need nothing
              pend_q[b]   <= color_on[scan_set[b][SET_W-1 -: COLOR_W]] ? scan_valid[b] : '0;
              loaded_q[b] <= 1'b1;
            end else begin
              logic [WAYS-1:0] rest;
              rest = pend_q[b];
              if (rest != '0) rest[lowest(rest)] = 1'b0;
              pend_q[b] <= rest;
              if (rest == '0) begin
                loaded_q[b] <= 1'b0;
                if (32'(lset_q[b]) == BANK_SETS - 1) busy_q[b] <= 1'b0;
                else lset_q[b] <= lset_q[b] + 1'b1;
              end
            end
          end
        end
      end
    end
  end

endmodule
