// tag_compare: the per-way "=?" comparators and the "Bit Concat" stage of the
// variation-aware cache.
//
// The request tag is compared with the stored tag of every way at once; a way
// hits when its entry is valid and its tag is equal. The per-way results are
// concatenated into the one-hot vector hit_vec (bit n = way n), which selects
// the delay register of the hit way and the output multiplexer input. hit is
// the OR of hit_vec and hit_way its binary index (0 when there is no hit).
// Purely combinational.
module tag_compare #(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned TAG_W = 14,
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic [TAG_W-1:0] req_tag,
  input  logic [TAG_W-1:0] way_tag   [WAYS],
  input  logic             way_valid [WAYS],
  output logic [WAYS-1:0]  hit_vec,
  output logic             hit,
  output logic [WAY_W-1:0] hit_way
);

  always_comb begin
    hit_way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      hit_vec[w] = way_valid[w] && (way_tag[w] == req_tag);
      if (hit_vec[w]) hit_way = WAY_W'(w);
    end
    hit = |hit_vec;
  end

endmodule
