// llc_pkg: sizes, types and constants shared by the variation-aware CNFET
// last level cache.
//
// The defaults describe the cache evaluated for the design: a 2 MB, 8-way
// set-associative LLC with 64-byte lines, hence 4096 sets. Way access latencies
// of the set-aligned layout lie between 6 and 12 cycles, set access latencies of
// the way-aligned layout between 6 and 10 cycles. The 32-bit physical byte
// address and the 4-bit latency field are choices of this implementation.
package llc_pkg;

  // Which CNT layout the cache array has, and therefore which latency
  // mechanism the cache uses.
  //   LAYOUT_VASA: CNT growth along the bitline; each way has its own latency
  //                (variation-aware set aligned cache, with data shuffling).
  //   LAYOUT_VAWA: CNT growth along the wordline; each set has its own latency
  //                (variation-aware way aligned cache, non-uniform grouping).
  typedef enum logic {
    LAYOUT_VASA = 1'b0,
    LAYOUT_VAWA = 1'b1
  } layout_e;

  localparam int unsigned DEF_WAYS       = 8;
  localparam int unsigned DEF_SETS       = 4096;
  localparam int unsigned DEF_LINE_BYTES = 64;
  localparam int unsigned DEF_ADDR_W     = 32;
  localparam int unsigned DEF_LAT_W      = 4;

  // Latency bounds (cycles) of the two layouts.
  localparam int unsigned VASA_LAT_MIN = 6;
  localparam int unsigned VASA_LAT_MAX = 12;
  localparam int unsigned VAWA_LAT_L1  = 6;
  localparam int unsigned VAWA_LAT_L2  = 7;
  localparam int unsigned VAWA_LAT_MAX = 10;

  // Register pairs (start, end) per low-latency set group in VAWA.
  localparam int unsigned DEF_VAWA_PAIRS = 16;

  // Configuration address map (cfg_addr, 8 bits):
  //   VASA: 0 .. WAYS-1            delay register of way n
  //   VAWA: 0, 1, 2                latency registers L1, L2, Lmax
  //         {1'b1, grp, pair, se}  segment register: grp 0/1, pair 0..31,
  //                                se 0 = start index, 1 = end index
  localparam logic [7:0] CFG_SEG_BIT = 8'h80;

endpackage
