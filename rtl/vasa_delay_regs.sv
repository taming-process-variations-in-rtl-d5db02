// vasa_delay_regs: the delay registers of the variation-aware set aligned
// (VASA) cache and the multiplexer that picks one of them.
//
// In the set-aligned CNFET layout every set of a way has about the same access
// latency, but the ways differ. One register per way holds that way's latency
// in cycles; it is written once, at initialisation, from the result of a
// post-fabrication test (cfg_we, cfg_way, cfg_lat). During an access the
// one-hot tag comparison result hit_vec selects the register of the hit way
// (AND-OR multiplexer) and passes it to the delay controller as lat.
// With 8 ways and 4-bit registers this is the 4 bytes of latency storage the
// VASA cache needs. After reset every register holds RESET_LAT, the worst
// latency, so an unconfigured cache is slow but correct.
module vasa_delay_regs #(
  parameter int unsigned WAYS      = 8,
  parameter int unsigned LAT_W     = 4,
  parameter int unsigned RESET_LAT = 12,
  localparam int unsigned WAY_W    = $clog2(WAYS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [WAY_W-1:0] cfg_way,
  input  logic [LAT_W-1:0] cfg_lat,
  input  logic [WAYS-1:0]  hit_vec,
  output logic [LAT_W-1:0] lat
);

  logic [LAT_W-1:0] dreg [WAYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned w = 0; w < WAYS; w++) dreg[w] <= LAT_W'(RESET_LAT);
    end else if (cfg_we) begin
      dreg[cfg_way] <= cfg_lat;
    end
  end

  always_comb begin
    lat = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (hit_vec[w]) lat = lat | dreg[w];
    end
  end

endmodule
