// mem_model: behavioural main memory for the cache testbenches (not
// synthesizable). Holds one line per line address in an associative array;
// a line never written reads as a fixed pattern of its address (see
// init_line). One request at a time: a read returns the line LATENCY cycles
// after the request is taken, as a one-cycle mem_rsp_valid pulse; a write is
// taken at once. reads and writes count the requests taken.
module mem_model #(
  parameter int unsigned ADDR_W  = 32,
  parameter int unsigned DATA_W  = 512,
  parameter int unsigned LATENCY = 30
) (
  input  logic              clk,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  logic              mem_req_we,
  input  logic [ADDR_W-1:0] mem_req_addr,
  input  logic [DATA_W-1:0] mem_req_wdata,
  output logic              mem_rsp_valid,
  output logic [DATA_W-1:0] mem_rsp_data,
  output int                reads,
  output int                writes
);

  logic [DATA_W-1:0] store [logic [ADDR_W-1:0]];
  int                countdown = 0;
  logic [ADDR_W-1:0] pend_addr;

  function automatic logic [DATA_W-1:0] init_line(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = (a * 32'h9E37_79B1) ^ (i * 32'h0101_0101);
    return d;
  endfunction

  initial begin
    reads = 0; writes = 0;
    mem_rsp_valid = 0; mem_rsp_data = '0; pend_addr = '0;
  end

  assign mem_req_ready = (countdown == 0) && !mem_rsp_valid;

  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (countdown > 0) begin
      countdown <= countdown - 1;
      if (countdown == 1) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= store.exists(pend_addr) ? store[pend_addr] : init_line(pend_addr);
      end
    end else if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin
        store[mem_req_addr] = mem_req_wdata;
        writes <= writes + 1;
      end else begin
        pend_addr <= mem_req_addr;
        countdown <= LATENCY;
        reads     <= reads + 1;
      end
    end
  end

endmodule
