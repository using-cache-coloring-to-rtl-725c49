// wl_pkg -- shared constants of the wear-levelled non-volatile last-level cache.
//
// The cache is a 4MB, 16-way, 64-byte-line STT-RAM LLC. Cache colouring splits it
// into N = CacheSize / (PageSize * Associativity) colours; with 4KB pages this is
// 64 colours of 64 sets each. The physical pages are split into 64 memory regions
// by the six least significant bits of the page number, and a small table maps
// each region to a colour. A byte address therefore splits as
//
//   [ADDR_W-1:18] tag | [17:12] region | [11:6] set within colour | [5:0] offset
//
// and the set index used in the array is {colour(region), set within colour}.
// Geometry, beta = 75, lambda = N/4 and the 3M-cycle minimum interval follow the
// paper; the 48-bit address, the interval length K, and the counter widths are
// this design's own choices. Latencies are in 2GHz cycles (write 12 cycles as
// stated, read 0.973 ns rounded up to 2 cycles).
package wl_pkg;

  localparam int unsigned ADDR_W         = 48;
  localparam int unsigned LINE_BYTES     = 64;
  localparam int unsigned LINE_W         = LINE_BYTES * 8;
  localparam int unsigned CACHE_BYTES    = 4 * 1024 * 1024;
  localparam int unsigned WAYS           = 16;
  localparam int unsigned PAGE_BYTES     = 4096;
  // Eq. (1): N = CacheSize / (PageSize x Associativity) = 64
  localparam int unsigned N_COLORS       = CACHE_BYTES / (PAGE_BYTES * WAYS);
  localparam int unsigned SETS           = CACHE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned SETS_PER_COLOR = SETS / N_COLORS;

  // Wear-levelling algorithm constants
  localparam int unsigned BETA           = 75;
  localparam int unsigned LAMBDA         = N_COLORS / 4;
  localparam int unsigned MIN_CYCLES     = 3_000_000;
  localparam int unsigned K_WRITES       = 32768;

  // Counter widths (this design's choice; both saturate)
  localparam int unsigned GW             = 32;  // nWriteGlobal
  localparam int unsigned IW             = 24;  // nWriteLastInterval

  // STT-RAM array latencies in cycles
  localparam int unsigned RD_LAT         = 2;
  localparam int unsigned WR_LAT         = 12;

endpackage
