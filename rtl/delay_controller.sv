// delay_controller: releases the cache output after the latency of the part of
// the array that is being read.
//
// start (one cycle, the cycle the request is accepted) clears the cycle count;
// from the next cycle the controller counts cycles 1, 2, 3, ... of the access.
// As soon as lat_valid is high and the count has reached lat, enable is high
// for one cycle: this is the enable of the output multiplexer, so the data of
// an access with latency lat is taken at the lat-th clock edge after the
// accepting edge. cancel ends an access without enable (a miss). A latency
// below the cycle in which lat_valid first rises is served in that cycle.
// busy is high while an access is being counted.
module delay_controller #(
  parameter int unsigned LAT_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             cancel,
  input  logic             lat_valid,
  input  logic [LAT_W-1:0] lat,
  output logic             enable,
  output logic             busy,
  output logic [LAT_W-1:0] count
);

  always_comb enable = busy && lat_valid && (count >= lat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      count <= '0;
    end else if (start) begin
      busy  <= 1'b1;
      count <= LAT_W'(1);
    end else if (busy) begin
      if (enable || cancel) begin
        busy <= 1'b0;
      end else if (count != '1) begin
        count <= count + 1'b1;
      end
    end
  end

endmodule
