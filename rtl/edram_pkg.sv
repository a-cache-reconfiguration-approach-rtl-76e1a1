// edram_pkg: sizes, address fields and small helper functions shared by the
// reconfigurable eDRAM last-level cache.
//
// The default geometry is a 2 MB, 8-way L2 with 64-byte lines and a 4 KB page,
// which gives M = S / (P * W) = 2 MB / (4 KB * 8) = 64 cache colors. A color
// is the group of sets selected by the low bits of the physical page number,
// i.e. the set-index bits that lie above the page offset. With 4096 sets and
// 64 sets per page, one color is 64 sets x 8 ways = 512 lines.
//
// Address layout (48-bit physical address, an assumption of this design):
//   [5:0]   byte in line
//   [11:6]  set inside a color (page-offset part of the set index)
//   [17:12] memory region = low bits of the physical page number
//   [47:12] tag kept in the colored cache (the region bits stay in the tag,
//           because several regions may share one color)
// The cache set actually used is {map[region], addr[11:6]}.
package edram_pkg;

  localparam int unsigned PADDR_W    = 48;     // physical address width (assumed)
  localparam int unsigned LINE_BYTES = 64;     // paper: block size 64 B
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFFS_W     = 6;      // log2(LINE_BYTES)
  localparam int unsigned PAGE_W     = 12;     // log2 of the 4 KB page
  localparam int unsigned SETS_PER_COLOR_W = PAGE_W - OFFS_W;   // 6 -> 64 sets

  typedef logic [PADDR_W-1:0]   paddr_t;
  typedef logic [LINE_BITS-1:0] line_t;

  // Number of set bits below the color bits (sets inside one color).
  function automatic int unsigned sets_per_color();
    return 1 << SETS_PER_COLOR_W;
  endfunction

endpackage
