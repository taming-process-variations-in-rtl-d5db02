// way_array: one way of the cache array, i.e. one set decoder, one tag array
// and one data array as drawn per way in the cache organisation.
//
// Each entry holds a valid bit, a tag and a full line. A read is synchronous:
// rd_en with rd_idx at a clock edge makes the entry appear on rd_valid/rd_tag/
// rd_data after that edge, where it stays until the next read. There is one
// write port; a write updates valid, tag and data of one set together. A read
// and a write of the same set at the same edge return the old entry.
//
// The storage has no reset: the cache controller clears the valid bits by
// writing every set once after reset. The real CNFET array delivers data after
// a way- or set-dependent number of cycles; this model delivers it in one cycle
// and the cache's delay controller decides when the output is used, which is
// how the variable latency is made visible at the cache port.
module way_array #(
  parameter int unsigned SETS   = 4096,
  parameter int unsigned TAG_W  = 14,
  parameter int unsigned DATA_W = 512,
  localparam int unsigned IDX_W = $clog2(SETS)
) (
  input  logic              clk,
  // read port
  input  logic              rd_en,
  input  logic [IDX_W-1:0]  rd_idx,
  output logic              rd_valid,
  output logic [TAG_W-1:0]  rd_tag,
  output logic [DATA_W-1:0] rd_data,
  // write port
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  logic              wr_valid,
  input  logic [TAG_W-1:0]  wr_tag,
  input  logic [DATA_W-1:0] wr_data
);

  logic [TAG_W:0]    tag_mem  [SETS];   // {valid, tag}
  logic [DATA_W-1:0] data_mem [SETS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      tag_mem[wr_idx]  <= {wr_valid, wr_tag};
      data_mem[wr_idx] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      {rd_valid, rd_tag} <= tag_mem[rd_idx];
      rd_data            <= data_mem[rd_idx];
    end
  end

endmodule
