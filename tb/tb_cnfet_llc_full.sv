// tb_cnfet_llc_full: the cache at its default size (2 MB, 8 ways, 64-byte
// lines, 4096 sets, set-aligned layout with data shuffling) against the
// 30-cycle behavioural memory. Checks the 4096-cycle valid-bit sweep after
// reset, then runs 600 random reads and writes whose hits, ways, latencies and
// data llc_checker predicts, and requires hits in every way group, shuffles,
// misses with eviction and write-through traffic to have happened.
module tb_cnfet_llc_full;
  import llc_pkg::*;
  localparam int ADDR_W = 32, DATA_W = 512;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, init_done, cfg_we, req_valid, req_ready, req_we, rsp_valid, rsp_hit;
  logic shuffle_active, mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, done;
  logic [7:0] cfg_addr;
  logic [15:0] cfg_wdata;
  logic [ADDR_W-1:0] req_addr, mem_req_addr;
  logic [DATA_W-1:0] req_wdata, rsp_data, mem_req_wdata, mem_rsp_data;
  logic [2:0] rsp_way;
  int mem_reads, mem_writes, checks, failures;
  int ev [16];

  cnfet_llc dut (.*);
  mem_model #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .LATENCY(30)) mem (
    .clk, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data, .reads(mem_reads), .writes(mem_writes));
  llc_checker #(.LAYOUT(LAYOUT_VASA), .SETS(4096), .N_OPS(600)) chk (
    .clk, .rst_n, .init_done, .cfg_we, .cfg_addr, .cfg_wdata, .req_valid, .req_ready,
    .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_data, .rsp_hit, .rsp_way,
    .shuffle_active, .mem_writes, .done, .checks, .failures, .ev);

  int extra_checks = 0, extra_failures = 0;

  initial begin
    wait (done);
    foreach (ev[i]) if (i inside {0, 1, 2, 3, 4, 5, 6, 8, 12}) begin
      extra_checks++;
      if (ev[i] == 0) begin extra_failures++; $display("FAIL mechanism %0d never happened", i); end
    end
    $display("hits per group %0d %0d %0d %0d, misses %0d, evictions %0d, shuffles %0d",
             ev[0], ev[1], ev[2], ev[3], ev[4], ev[5], ev[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
