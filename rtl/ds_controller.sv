// ds_controller: latency-aware data shuffling for the variation-aware set
// aligned (VASA) cache.
//
// The ways of a set are split into GROUPS groups of two, group g holding ways
// 2g and 2g+1; group 0 is meant to hold the fastest ways and group GROUPS-1
// the slowest, which the way latencies written at initialisation should
// follow. Each way has one priority bit T (8 bits per set for 8 ways); within
// a group the way with T = 0 holds the more recently used block, the way with
// T = 1 the less recently used one, which is the block that leaves the group
// when another block enters it.
//
// On a hit in way w of group h the block moves to the fastest group and the
// displaced blocks move down by one group each, in a cascade that stops at
// group h:
//   buffer g <- T=1 way of group g           (g < h)
//   buffer h <- way w
//   T=1 way of group 0   <- buffer h
//   T=1 way of group g   <- buffer g-1       (0 < g < h)
//   way w                <- buffer h-1
// and every way that receives a block gets T = 0, its partner T = 1. A hit in
// group 0 moves nothing and only flips the two T bits. A miss is a cascade
// over all groups: the new line is written into the T=1 way of group 0 and
// the T=1 block of the last group is the victim (it leaves via buffer
// GROUPS-1). The plan is combinational from the T bits read for the set; the
// cache performs it in two cycles, first loading the buffers from the lines
// read during the lookup, then writing all target ways in parallel.
//
// T bits are read synchronously (rd_en/rd_idx, t_q after the edge) and written
// with upd_en. init_en writes the reset pattern (T = 0 for way 2g, T = 1 for
// way 2g+1) into set init_idx.
module ds_controller #(
  parameter int unsigned WAYS = 8,
  parameter int unsigned SETS = 4096,
  localparam int unsigned GROUPS = WAYS / 2,
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned IDX_W  = $clog2(SETS)
) (
  input  logic             clk,
  // T bit storage
  input  logic             rd_en,
  input  logic [IDX_W-1:0] rd_idx,
  input  logic             upd_en,
  input  logic [IDX_W-1:0] upd_idx,
  input  logic             init_en,
  input  logic [IDX_W-1:0] init_idx,
  output logic [WAYS-1:0]  t_q,
  // access outcome for the set just read
  input  logic             hit,
  input  logic [WAY_W-1:0] hit_way,
  // shuffle plan
  output logic             shuffle,                 // any block moves
  output logic [WAYS-1:0]  t_new,                   // T bits to write back
  output logic [GROUPS-1:0] buf_load,               // buffer g is loaded
  output logic [WAY_W-1:0] buf_src  [GROUPS],       // way that buffer g loads from
  output logic [WAYS-1:0]  way_wr,                  // way is written
  output logic [WAYS-1:0]  way_from_new,            // written with the new line
  output logic [GRP_W-1:0] way_buf  [WAYS],         // else from this buffer
  output logic [WAY_W-1:0] victim                   // way whose block is evicted on a miss
);

  logic [WAYS-1:0] t_mem [SETS];
  logic [WAYS-1:0] t_init;

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) t_init[w] = w[0];
  end

  always_ff @(posedge clk) begin
    if (init_en)     t_mem[init_idx] <= t_init;
    else if (upd_en) t_mem[upd_idx]  <= t_new;
    if (rd_en) t_q <= t_mem[rd_idx];
  end

  // T=1 way of group g: the block that leaves group g.
  function automatic logic [WAY_W-1:0] lru_of(input logic [WAYS-1:0] t, input int unsigned g);
    return t[2*g] ? WAY_W'(2*g) : WAY_W'(2*g + 1);
  endfunction

  always_comb begin
    int unsigned h;
    logic [WAY_W-1:0] dst;
    h = hit ? int'(hit_way) / 2 : GROUPS;   // a miss cascades over every group
    dst = '0;
    t_new        = t_q;
    buf_load     = '0;
    way_wr       = '0;
    way_from_new = '0;
    for (int unsigned g = 0; g < GROUPS; g++) buf_src[g] = '0;
    for (int unsigned w = 0; w < WAYS; w++)   way_buf[w] = '0;
    victim = lru_of(t_q, GROUPS - 1);

    for (int unsigned g = 0; g < GROUPS; g++) begin
      if (g < h) begin
        // the T=1 block of group g leaves; the block from above enters there
        dst         = lru_of(t_q, g);
        buf_load[g] = 1'b1;
        buf_src[g]  = dst;
        way_wr[dst] = 1'b1;
        if (g == 0) begin
          if (hit) way_buf[dst] = GRP_W'(h);
          else     way_from_new[dst] = 1'b1;
        end else begin
          way_buf[dst] = GRP_W'(g - 1);
        end
        t_new[dst]        = 1'b0;
        t_new[dst ^ 'd1]  = 1'b1;
      end else if (g == h) begin
        // hit group: the hit way becomes the most recent of its group and,
        // if the block moved up, receives the block leaving the group above
        t_new[hit_way]       = 1'b0;
        t_new[hit_way ^ 'd1] = 1'b1;
        if (h > 0) begin
          buf_load[g]     = 1'b1;
          buf_src[g]      = hit_way;
          way_wr[hit_way] = 1'b1;
          way_buf[hit_way] = GRP_W'(g - 1);
        end
      end
    end
    shuffle = |way_wr;
  end

endmodule
