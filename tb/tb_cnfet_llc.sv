// tb_cnfet_llc: end-to-end test of the variation-aware cache in both layouts,
// and of the set-aligned one also without data shuffling (DS_EN = 0), at 64 sets to keep the run short (ways, line size and latencies as in the
// default configuration). Each cache is connected to a 30-cycle behavioural
// main memory and driven by llc_checker, which predicts every response
// (hit/miss, way, latency in cycles, data) with its own reference model.
// The test also requires each mechanism to have happened at least once:
// VASA hits in every way group, data shuffles, misses with eviction,
// write hits and write misses; VAWA hits in the L1, L2 and Lmax set groups
// and LRU evictions; VASA without shuffling: hits in every way group at that
// way's latency, LRU evictions and not one shuffle cycle; the valid-bit sweep
// after reset in all three.
module tb_cnfet_llc;
  import llc_pkg::*;
  localparam int SETS = 64, ADDR_W = 32, DATA_W = 512;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // environment 0: VASA with shuffling, 1: VAWA, 2: VASA without shuffling
  for (genvar L = 0; L < 3; L++) begin : g_env
    localparam layout_e LAY = (L == 1) ? LAYOUT_VAWA : LAYOUT_VASA;
    localparam bit DS = (L != 2);
    logic rst_n, init_done, cfg_we, req_valid, req_ready, req_we, rsp_valid, rsp_hit;
    logic shuffle_active, mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, done;
    logic [7:0] cfg_addr;
    logic [15:0] cfg_wdata;
    logic [ADDR_W-1:0] req_addr, mem_req_addr;
    logic [DATA_W-1:0] req_wdata, rsp_data, mem_req_wdata, mem_rsp_data;
    logic [2:0] rsp_way;
    int mem_reads, mem_writes, c_checks, c_failures;
    int ev [16];

    cnfet_llc #(.LAYOUT(LAY), .DS_EN(DS), .SETS(SETS)) dut (.*);
    mem_model #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .LATENCY(30)) mem (
      .clk, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
      .mem_rsp_valid, .mem_rsp_data, .reads(mem_reads), .writes(mem_writes));
    llc_checker #(.LAYOUT(LAY), .DS(DS), .SETS(SETS), .N_OPS(1500)) chk (
      .clk, .rst_n, .init_done, .cfg_we, .cfg_addr, .cfg_wdata, .req_valid, .req_ready,
      .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_data, .rsp_hit, .rsp_way,
      .shuffle_active, .mem_writes, .done, .checks(c_checks), .failures(c_failures), .ev);
  end

  task automatic need(input int count, input string what);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    wait (g_env[0].done && g_env[1].done && g_env[2].done);
    checks   = g_env[0].c_checks + g_env[1].c_checks + g_env[2].c_checks;
    failures = g_env[0].c_failures + g_env[1].c_failures + g_env[2].c_failures;
    $display("VASA (set aligned, data shuffling):");
    need(g_env[0].ev[12], "valid-bit sweep");
    need(g_env[0].ev[0], "hits in group 0 (no move)");
    need(g_env[0].ev[1], "hits in group 1");
    need(g_env[0].ev[2], "hits in group 2");
    need(g_env[0].ev[3], "hits in group 3");
    need(g_env[0].ev[8], "shuffles (hit or fill)");
    need(g_env[0].chk.sh_cycles, "shuffle cycles at port");
    need(g_env[0].ev[4], "read misses");
    need(g_env[0].ev[5], "evictions");
    need(g_env[0].ev[6], "write hits");
    need(g_env[0].ev[7], "write misses");
    $display("VAWA (way aligned, non-uniform grouping):");
    need(g_env[1].ev[12], "valid-bit sweep");
    need(g_env[1].ev[9], "hits in L1 sets");
    need(g_env[1].ev[10], "hits in L2 sets");
    need(g_env[1].ev[11], "hits in Lmax sets");
    need(g_env[1].ev[4], "read misses");
    need(g_env[1].ev[5], "LRU evictions");
    need(g_env[1].ev[6], "write hits");
    need(g_env[1].ev[7], "write misses");
    $display("VASA without data shuffling (LRU):");
    need(g_env[2].ev[12], "valid-bit sweep");
    need(g_env[2].ev[0], "hits in group 0");
    need(g_env[2].ev[1], "hits in group 1");
    need(g_env[2].ev[2], "hits in group 2");
    need(g_env[2].ev[3], "hits in group 3");
    need(g_env[2].ev[4], "read misses");
    need(g_env[2].ev[5], "LRU evictions");
    need(g_env[2].ev[6], "write hits");
    need(g_env[2].ev[7], "write misses");
    checks++;
    if (g_env[2].chk.sh_cycles != 0) begin
      failures++;
      $display("FAIL shuffle_active seen %0d cycles with shuffling off", g_env[2].chk.sh_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
