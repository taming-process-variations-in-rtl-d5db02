// lru_replacement: least-recently-used replacement state for a cache that does
// not shuffle data (the way-aligned cache, where all ways of a set have the
// same latency).
//
// Every set keeps an age of $clog2(WAYS) bits per way; the ages of a set are a
// permutation of 0 .. WAYS-1, 0 being the most recently used way. rd_en/rd_idx
// read a set's ages synchronously (ages appear after the edge); victim is then
// the way whose age is WAYS-1. upd_en writes back the ages of set upd_idx with
// way upd_way made the most recent: ways younger than it age by one. upd must
// use the ages just read for the same set. init_en writes the reset order
// (age of way n = n) into set init_idx; the cache controller walks all sets
// with it after reset.
module lru_replacement #(
  parameter int unsigned WAYS = 8,
  parameter int unsigned SETS = 4096,
  localparam int unsigned WAY_W = $clog2(WAYS),
  localparam int unsigned IDX_W = $clog2(SETS)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [IDX_W-1:0] rd_idx,
  input  logic             upd_en,
  input  logic [IDX_W-1:0] upd_idx,
  input  logic [WAY_W-1:0] upd_way,
  input  logic             init_en,
  input  logic [IDX_W-1:0] init_idx,
  output logic [WAY_W-1:0] victim
);

  typedef logic [WAYS-1:0][WAY_W-1:0] ages_t;

  ages_t age_mem [SETS];
  ages_t ages_q;
  ages_t ages_new;
  ages_t ages_init;

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) ages_init[w] = WAY_W'(w);
  end

  always_comb begin
    victim = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (ages_q[w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
  end

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (WAY_W'(w) == upd_way)            ages_new[w] = '0;
      else if (ages_q[w] < ages_q[upd_way]) ages_new[w] = ages_q[w] + 1'b1;
      else                                  ages_new[w] = ages_q[w];
    end
  end

  always_ff @(posedge clk) begin
    if (init_en)     age_mem[init_idx] <= ages_init;
    else if (upd_en) age_mem[upd_idx]  <= ages_new;
    if (rd_en) ages_q <= age_mem[rd_idx];
  end

endmodule
