// color_map_table: the region-to-color mapping table of the cache-coloring
// scheme. Physical memory is split into M regions by the low bits of the
// physical page number; entry r holds the cache color that region r uses.
// Mapping all regions onto m < M colors confines the program to those colors,
// so the rest can be powered off. Default M = 64 entries of log2(64) = 6 bits,
// the size the paper works out for a 2 MB, 8-way cache.
//
// The table has two copies. The live copy steers demand accesses through the
// combinational read port lk_region -> lk_color. Software writes new entries
// into a shadow copy (wr_en/wr_region/wr_color, one entry per cycle), which has
// no effect on the cache until commit is pulsed; then the whole shadow copy
// becomes live on the next clock edge. The reconfiguration flush reads the
// shadow copy through sh_region -> sh_color to decide which lines no longer
// belong where they are. Both copies reset to the identity map (region r in
// color r), i.e. the full-size cache. The shadow copy and the commit pulse are
// choices of this design; the paper only says a small mapping table is used.
module color_map_table #(
  parameter int unsigned NUM_COLORS = 64,
  parameter int unsigned COLOR_W    = $clog2(NUM_COLORS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // software write port into the shadow copy
  input  logic               wr_en,
  input  logic [COLOR_W-1:0] wr_region,
  input  logic [COLOR_W-1:0] wr_color,
  // copy shadow -> live
  input  logic               commit,
  // demand lookup (live copy)
  input  logic [COLOR_W-1:0] lk_region,
  output logic [COLOR_W-1:0] lk_color,
  // flush lookup (shadow copy)
  input  logic [COLOR_W-1:0] sh_region,
  output logic [COLOR_W-1:0] sh_color
);

  logic [COLOR_W-1:0] live_q   [NUM_COLORS];
  logic [COLOR_W-1:0] shadow_q [NUM_COLORS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_COLORS; i++) begin
        live_q[i]   <= COLOR_W'(i);
        shadow_q[i] <= COLOR_W'(i);
      end
    end else begin
      if (wr_en) shadow_q[wr_region] <= wr_color;
      if (commit) begin
        for (int i = 0; i < NUM_COLORS; i++) live_q[i] <= shadow_q[i];
      end
    end
  end

  assign lk_color = live_q[lk_region];
  assign sh_color = shadow_q[sh_region];

endmodule
