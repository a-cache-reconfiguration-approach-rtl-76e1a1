// edram_l2_cache: the colored, set-associative eDRAM last-level cache.
//
// What it does. A write-back, write-allocate, true-LRU cache (default 2 MB,
// 8 ways, 64-byte lines, 4096 sets, 12-cycle hit latency, all as in the
// paper's evaluated system). Its set index is not taken straight from the
// address: the page-number bits that would normally select a group of 64 sets
// (the memory region) are passed through the color map, so a region lands in
// whichever color the map gives it. The cache set is {map[region], addr[11:6]}
// and the tag is addr[47:12], which keeps the region bits so that regions that
// share a color stay distinct.
//
// Besides demand accesses it runs the flush walk that reconfiguration needs.
// On flush_start it stops taking requests, visits every line of the colors in
// flush_walk_mask one per cycle, and drops each valid line that does not
// survive the new configuration: its color is not in flush_keep_mask, or the
// shadow map (read through flush_region -> flush_color) sends its region to
// another color. Dropped dirty lines are written back to memory first. Lines
// that survive keep their data. flush_done pulses when the walk is over.
//
// Refresh. The refresh controller reads the valid bits of one set per bank
// (ref_scan_set -> ref_scan_valid) and fires ref_fire[b] for the cycles in
// which bank b refreshes a line. A refresh takes that bank for the cycle, so
// a lookup or flush step aimed at the same bank waits; the other bank is free.
// The bank of a set is its top bits (color MSBs with the default two banks).
//
// Interface timing. req_* is a valid/ready handshake; requests are whole lines
// (an L1 fill is a read, an L1 writeback is a write). One request is in flight
// at a time. A hit answers with resp_valid exactly HIT_LATENCY cycles after the
// handshake cycle, unless a refresh of the same bank delays the lookup. A miss
// answers after the victim writeback (if dirty) and, for reads, the memory
// fetch. mem_req_* is valid/ready; a read is answered by one mem_resp_valid
// cycle. ev_* are one-cycle event pulses for counters.
//
// Paper vs. this design: size, associativity, line size, LRU, 12-cycle latency,
// single-cycle line refresh per bank, two 1 MB banks and flushing on color
// turn-off follow the paper. The line-granular interface, one outstanding
// request, the 48-bit address, write-allocate without fetch for full-line
// writes and flushing of remapped regions from colors that stay on are this
// design's own choices.
module edram_l2_cache
  import edram_pkg::*;
#(
  parameter int unsigned NUM_COLORS  = 64,
  parameter int unsigned WAYS        = 8,
  parameter int unsigned NUM_BANKS   = 2,
  parameter int unsigned HIT_LATENCY = 12,
  parameter int unsigned COLOR_W     = $clog2(NUM_COLORS),
  parameter int unsigned SET_W       = COLOR_W + SETS_PER_COLOR_W,
  parameter int unsigned WAY_W       = (WAYS > 1) ? $clog2(WAYS) : 1,
  parameter int unsigned BANK_W      = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // demand port
  input  logic                 req_valid,
  output logic                 req_ready,
  input  paddr_t               req_addr,
  input  logic                 req_write,
  input  logic                 req_load,
  input  line_t                req_wdata,
  output logic                 resp_valid,
  output logic                 resp_hit,
  output line_t                resp_rdata,
  // live color map lookup
  output logic [COLOR_W-1:0]   map_region,
  input  logic [COLOR_W-1:0]   map_color,
  // reconfiguration flush
  input  logic                 flush_start,
  input  logic [NUM_COLORS-1:0] flush_walk_mask,
  input  logic [NUM_COLORS-1:0] flush_keep_mask,
  output logic [COLOR_W-1:0]   flush_region,
  input  logic [COLOR_W-1:0]   flush_color,
  output logic                 flush_busy,
  output logic                 flush_done,
  // refresh
  input  logic [SET_W-1:0]     ref_scan_set [NUM_BANKS],
  output logic [WAYS-1:0]      ref_scan_valid [NUM_BANKS],
  input  logic [NUM_BANKS-1:0] ref_fire,
  // memory side
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_write,
  output paddr_t               mem_req_addr,
  output line_t                mem_req_wdata,
  input  logic                 mem_resp_valid,
  input  line_t                mem_resp_rdata,
  // event pulses
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_load_miss,
  output logic                 ev_insert,
  output logic                 ev_evict_valid,
  output logic                 ev_mem_access
);

  localparam int unsigned SETS  = 1 << SET_W;
  localparam int unsigned TAG_W = PADDR_W - PAGE_W;
  localparam int unsigned SPC_W = SETS_PER_COLOR_W;

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [SET_W-1:0] set_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_HITWAIT, S_WB, S_FETCH_REQ, S_FETCH_WAIT, S_RESP,
    S_FL_SCAN, S_FL_WB
  } state_e;

  // ---------------------------------------------------------------- arrays
  logic [WAYS-1:0]  valid_q [SETS];
  logic [WAYS-1:0]  dirty_q [SETS];
  tag_t             tag_q   [SETS][WAYS];
  logic [WAY_W-1:0] age_q   [SETS][WAYS];   // 0 = most recently used
  line_t            data_q  [SETS*WAYS];

  // ---------------------------------------------------------------- state
  state_e state_q;
  paddr_t addr_q;
  logic   write_q, load_q;
  line_t  wdata_q, rdata_q;
  logic   hit_q;
  set_t   set_q;
  way_t   way_q;
  logic [$clog2(HIT_LATENCY+1)-1:0] lat_q;
  logic   flush_pend_q;
  logic [NUM_COLORS-1:0] walk_mask_q, keep_mask_q;
  set_t   fl_set_q;
  way_t   fl_way_q;
  paddr_t wb_addr_q;
  line_t  wb_data_q;

  // ---------------------------------------------------------------- helpers
  function automatic logic [BANK_W-1:0] bank_of(input set_t s);
    if (NUM_BANKS > 1) return s[SET_W-1 -: BANK_W];
    else               return '0;
  endfunction

  function automatic int unsigned idx(input set_t s, input way_t w);
    return int'(s) * WAYS + int'(w);
  endfunction

  // ---------------------------------------------------------------- lookup
  tag_t req_tag;
  set_t req_set;
  assign req_tag    = addr_q[PADDR_W-1:PAGE_W];
  assign map_region = addr_q[PAGE_W +: COLOR_W];
  assign req_set    = {map_color, addr_q[OFFS_W +: SPC_W]};

  logic [WAYS-1:0] hit_vec;
  way_t            hit_way, victim_way;
  logic            any_hit, any_invalid;

  always_comb begin
    hit_way     = '0;
    any_hit     = 1'b0;
    victim_way  = '0;
    any_invalid = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      hit_vec[w] = valid_q[req_set][w] && (tag_q[req_set][w] == req_tag);
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (hit_vec[w]) begin hit_way = way_t'(w); any_hit = 1'b1; end
    end
    // victim: lowest invalid way, else the least recently used way
    for (int w = WAYS-1; w >= 0; w--) begin
      if (age_q[req_set][w] == way_t'(WAYS-1)) victim_way = way_t'(w);
    end
    for (int w = WAYS-1; w >= 0; w--) begin
      if (!valid_q[req_set][w]) begin victim_way = way_t'(w); any_invalid = 1'b1; end
    end
  end

  // refresh scan ports
  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) ref_scan_valid[b] = valid_q[ref_scan_set[b]];
  end

  // flush walk view of the current line
  logic fl_color_walk, fl_line_valid, fl_drop;
  logic [COLOR_W-1:0] fl_color;
  assign fl_color      = fl_set_q[SET_W-1 -: COLOR_W];
  assign fl_color_walk = walk_mask_q[fl_color];
  assign fl_line_valid = valid_q[fl_set_q][fl_way_q];
  assign flush_region  = tag_q[fl_set_q][fl_way_q][COLOR_W-1:0];
  assign fl_drop       = fl_line_valid &&
                         (!keep_mask_q[fl_color] || (flush_color != fl_color));

  logic lk_bank_free, fl_bank_free;
  assign lk_bank_free = !ref_fire[bank_of(req_set)];
  assign fl_bank_free = !ref_fire[bank_of(fl_set_q)];

  logic fl_last;
  assign fl_last = (fl_way_q == way_t'(WAYS-1)) && (fl_set_q == set_t'(SETS-1));

  // ---------------------------------------------------------------- outputs
  assign req_ready  = (state_q == S_IDLE) && !flush_pend_q && !flush_start;
  assign resp_valid = (state_q == S_RESP);
  assign resp_hit   = hit_q;
  assign resp_rdata = rdata_q;
  assign flush_busy = flush_pend_q;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_write = 1'b0;
    mem_req_addr  = wb_addr_q;
    mem_req_wdata = wb_data_q;
    unique case (state_q)
      S_WB, S_FL_WB: begin mem_req_valid = 1'b1; mem_req_write = 1'b1; end
      S_FETCH_REQ:   begin
        mem_req_valid = 1'b1;
        mem_req_addr  = {addr_q[PADDR_W-1:OFFS_W], {OFFS_W{1'b0}}};
      end
      default: ;
    endcase
  end
  assign ev_mem_access = mem_req_valid && mem_req_ready;

  // ---------------------------------------------------------------- LRU touch
  task automatic touch(input set_t s, input way_t w);
    for (int i = 0; i < WAYS; i++) begin
      if (age_q[s][i] < age_q[s][w]) age_q[s][i] <= age_q[s][i] + 1'b1;
    end
    age_q[s][w] <= '0;
  endtask

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      flush_pend_q <= 1'b0;
      flush_done   <= 1'b0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      ev_load_miss <= 1'b0;
      ev_insert    <= 1'b0;
      ev_evict_valid <= 1'b0;
      addr_q <= '0; write_q <= 1'b0; load_q <= 1'b0; hit_q <= 1'b0;
      wdata_q <= '0; rdata_q <= '0; set_q <= '0; way_q <= '0; lat_q <= '0;
      walk_mask_q <= '0; keep_mask_q <= '0; fl_set_q <= '0; fl_way_q <= '0;
      wb_addr_q <= '0; wb_data_q <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        dirty_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) age_q[s][w] <= way_t'(w);
      end
    end else begin
      flush_done     <= 1'b0;
      ev_hit         <= 1'b0;
      ev_miss        <= 1'b0;
      ev_load_miss   <= 1'b0;
      ev_insert      <= 1'b0;
      ev_evict_valid <= 1'b0;
      if (lat_q != '1) lat_q <= lat_q + 1'b1;

      if (flush_start && !flush_pend_q) begin
        flush_pend_q <= 1'b1;
        walk_mask_q  <= flush_walk_mask;
        keep_mask_q  <= flush_keep_mask;
        fl_set_q     <= '0;
        fl_way_q     <= '0;
      end

      unique case (state_q)
        S_IDLE: begin
          if (flush_pend_q) begin
            state_q <= S_FL_SCAN;
          end else if (req_valid && req_ready) begin
            addr_q  <= req_addr;
            write_q <= req_write;
            load_q  <= req_load && !req_write;
            wdata_q <= req_wdata;
            lat_q   <= 1;
            state_q <= S_LOOKUP;
          end
        end

        S_LOOKUP: if (lk_bank_free) begin
          set_q <= req_set;
          hit_q <= any_hit;
          if (any_hit) begin
            ev_hit <= 1'b1;
            touch(req_set, hit_way);
            if (write_q) begin
              data_q[idx(req_set, hit_way)] <= wdata_q;
              dirty_q[req_set][hit_way]     <= 1'b1;
            end else begin
              rdata_q <= data_q[idx(req_set, hit_way)];
            end
            state_q <= S_HITWAIT;
          end else begin
            ev_miss      <= 1'b1;
            ev_load_miss <= load_q;
            way_q        <= victim_way;
            wb_addr_q    <= {tag_q[req_set][victim_way], req_set[SPC_W-1:0],
                             {OFFS_W{1'b0}}};
            wb_data_q    <= data_q[idx(req_set, victim_way)];
            if (!any_invalid) ev_evict_valid <= 1'b1;
            // the victim leaves now; it is written back from wb_* if dirty
            valid_q[req_set][victim_way] <= 1'b0;
            if (!any_invalid && dirty_q[req_set][victim_way]) state_q <= S_WB;
            else if (write_q) state_q <= S_FETCH_WAIT;   // full line: no fetch
            else state_q <= S_FETCH_REQ;
          end
        end

        S_HITWAIT: if (32'(lat_q) >= HIT_LATENCY - 1) state_q <= S_RESP;

        S_WB: if (mem_req_ready) state_q <= write_q ? S_FETCH_WAIT : S_FETCH_REQ;

        S_FETCH_REQ: if (mem_req_ready) state_q <= S_FETCH_WAIT;

        S_FETCH_WAIT: if (write_q || mem_resp_valid) begin
          // install the line (bank conflicts with refresh do not apply: the
          // fill reuses the slot reserved at lookup)
          data_q[idx(set_q, way_q)]  <= write_q ? wdata_q : mem_resp_rdata;
          rdata_q                    <= write_q ? wdata_q : mem_resp_rdata;
          valid_q[set_q][way_q]      <= 1'b1;
          dirty_q[set_q][way_q]      <= write_q;
          tag_q[set_q][way_q]        <= req_tag;
          touch(set_q, way_q);
          ev_insert <= 1'b1;
          state_q   <= S_RESP;
        end

        S_RESP: state_q <= S_IDLE;

        S_FL_SCAN: begin
          if (!fl_color_walk) begin
            // color was off: nothing valid in it, skip the whole set
            fl_way_q <= '0;
            if (fl_set_q == set_t'(SETS-1)) begin
              state_q <= S_IDLE; flush_pend_q <= 1'b0; flush_done <= 1'b1;
            end else fl_set_q <= fl_set_q + 1'b1;
          end else if (fl_bank_free) begin
            if (fl_drop) begin
              valid_q[fl_set_q][fl_way_q] <= 1'b0;
              ev_evict_valid <= 1'b1;
              wb_addr_q <= {tag_q[fl_set_q][fl_way_q], fl_set_q[SPC_W-1:0],
                            {OFFS_W{1'b0}}};
              wb_data_q <= data_q[idx(fl_set_q, fl_way_q)];
            end
            if (fl_drop && dirty_q[fl_set_q][fl_way_q]) begin
              dirty_q[fl_set_q][fl_way_q] <= 1'b0;
              state_q <= S_FL_WB;
            end else if (fl_last) begin
              state_q <= S_IDLE; flush_pend_q <= 1'b0; flush_done <= 1'b1;
            end
            if (!(fl_drop && dirty_q[fl_set_q][fl_way_q]) && !fl_last) begin
              fl_way_q <= fl_way_q + 1'b1;
              if (fl_way_q == way_t'(WAYS-1)) fl_set_q <= fl_set_q + 1'b1;
            end
          end
        end

        S_FL_WB: if (mem_req_ready) begin
          if (fl_last) begin
            state_q <= S_IDLE; flush_pend_q <= 1'b0; flush_done <= 1'b1;
          end else begin
            state_q  <= S_FL_SCAN;
            fl_way_q <= fl_way_q + 1'b1;
            if (fl_way_q == way_t'(WAYS-1)) fl_set_q <= fl_set_q + 1'b1;
          end
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // A handshake on the memory port must hold its request until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid)
    else $error("edram_l2_cache: memory request dropped before acceptance");

endmodule
