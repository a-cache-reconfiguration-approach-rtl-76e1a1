// reconfig_controller: carries out a cache reconfiguration that software (the
// energy saving algorithm, run once per interval) has decided on.
//
// Software first stages the new region-to-color map in the shadow copy of the
// color map table and the new set of powered colors with cfg_mask_we/cfg_mask,
// then pulses cfg_commit. The controller then
//   1. starts the cache flush walk over the colors that are on now
//      (flush_walk_mask = current mask) keeping only lines whose color stays on
//      and whose region the new map still sends there (flush_keep_mask = new
//      mask); dirty lines that go are written back by the cache;
//   2. when the cache reports flush_done, pulses map_commit so the new map
//      becomes live, and switches color_on to the new mask in the same cycle;
//   3. adds the number of lines switched on or off, B = (colors that changed)
//      x LINES_PER_COLOR, to the transition count used for E_chi x B.
// busy is high from cfg_commit until the new configuration is live; a commit
// while busy is ignored. color_on drives the power gates of the colors (the
// gates themselves are a circuit technique outside this logic) and the refresh
// controller; n_active is its population count (active fraction F_A = n_active
// / NUM_COLORS). A commit with an empty mask is refused and sets cfg_error.
// After reset all colors are on (the full-size cache).
//
// Flushing of turned-off colors and remapping of their regions follow the
// paper; the staging, the commit pulse, the order flush-then-switch and the
// empty-mask rule are this design's choices.
module reconfig_controller #(
  parameter int unsigned NUM_COLORS      = 64,
  parameter int unsigned LINES_PER_COLOR = 512,
  parameter int unsigned TRANS_W         = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_mask_we,
  input  logic [NUM_COLORS-1:0]         cfg_mask,
  input  logic                          cfg_commit,
  output logic                          busy,
  output logic                          cfg_error,
  // to the cache
  output logic                          flush_start,
  output logic [NUM_COLORS-1:0]         flush_walk_mask,
  output logic [NUM_COLORS-1:0]         flush_keep_mask,
  input  logic                          flush_done,
  // to the color map table
  output logic                          map_commit,
  // power state
  output logic [NUM_COLORS-1:0]         color_on,
  output logic [$clog2(NUM_COLORS+1)-1:0] n_active,
  // transitions of this commit (one-cycle pulse with the amount)
  output logic                          trans_valid,
  output logic [TRANS_W-1:0]            trans_lines
);

  typedef enum logic [1:0] {R_IDLE, R_FLUSH, R_WAIT} rstate_e;
  rstate_e state_q;
  logic [NUM_COLORS-1:0] next_mask_q;

  assign busy            = (state_q != R_IDLE);
  assign flush_walk_mask = color_on;
  assign flush_keep_mask = next_mask_q;
  assign flush_start     = (state_q == R_FLUSH);
  assign n_active        = $bits(n_active)'($countones(color_on));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= R_IDLE;
      next_mask_q <= '1;
      color_on    <= '1;
      map_commit  <= 1'b0;
      cfg_error   <= 1'b0;
      trans_valid <= 1'b0;
      trans_lines <= '0;
    end else begin
      map_commit  <= 1'b0;
      trans_valid <= 1'b0;
      if (cfg_mask_we && state_q == R_IDLE) next_mask_q <= cfg_mask;
      unique case (state_q)
        R_IDLE: if (cfg_commit) begin
          if (next_mask_q == '0) cfg_error <= 1'b1;
          else state_q <= R_FLUSH;
        end
        R_FLUSH: state_q <= R_WAIT;          // one-cycle start pulse
        R_WAIT: if (flush_done) begin
          map_commit  <= 1'b1;
          color_on    <= next_mask_q;
          trans_valid <= 1'b1;
          trans_lines <= TRANS_W'($countones(color_on ^ next_mask_q) * LINES_PER_COLOR);
          state_q     <= R_IDLE;
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end

endmodule
