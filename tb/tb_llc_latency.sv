// tb_llc_latency: compares the average hit latency of the cache
// configurations on one access trace with strong reuse, in the way the
// variation-aware designs are judged against a worst-timing cache:
//   env 0  set aligned, every way at the worst latency (12), no shuffling
//   env 1  set aligned, per-way latencies 6..12, LRU (VASA)
//   env 2  set aligned, per-way latencies, data shuffling (VASA+DS)
//   env 3  way aligned, no runs configured: every set at Lmax (10)
//   env 4  way aligned, runs configured (VAWA with non-uniform grouping)
// The trace is the same for all five: reads only, 16 sets, and per set a
// skewed choice among 12 lines, so a few lines take most of the accesses.
// Every response is checked (data, and the latency of every hit against the
// way's or set's configured latency); then the averages must order as
// env 2 < env 1 < env 0 = 12 and env 4 < env 3 = 10, and envs 0 and 1, which
// replace alike, must see the same number of hits. The caches use 64 sets to
// keep the reset sweep short.
module tb_llc_latency;
  import llc_pkg::*;
  localparam int SETS = 64, ADDR_W = 32, DATA_W = 512, N_OPS = 3000, N_ENV = 5;
  localparam int OFF_W = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // shared trace, filled before any cache leaves reset
  logic [ADDR_W-1:0] trace [N_OPS];
  bit trace_ready = 0;

  int way_lat [8] = '{6, 7, 8, 8, 9, 10, 12, 11};
  int seg_s [2] = '{0, 4};   // one run per low-latency group
  int seg_e [2] = '{4, 8};

  function automatic int set_lat(input int s);
    if (s >= seg_s[0] && s < seg_e[0]) return 6;
    if (s >= seg_s[1] && s < seg_e[1]) return 7;
    return 10;
  endfunction

  function automatic logic [DATA_W-1:0] init_line(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = (a * 32'h9E37_79B1) ^ (i * 32'h0101_0101);
    return d;
  endfunction

  initial begin
    for (int op = 0; op < N_OPS; op++) begin
      int s, r, k;
      s = $urandom % 16;
      r = $urandom % 100;
      k = (r < 40) ? 0 : (r < 60) ? 1 : (r < 72) ? 2 : (r < 80) ? 3 : (r < 86) ? 4 :
          (r < 90) ? 5 : (r < 93) ? 6 : (r < 95) ? 7 : 8 + ($urandom % 4);
      trace[op] = ADDR_W'((k * SETS + s) << OFF_W);
    end
    trace_ready = 1;
  end

  for (genvar E = 0; E < N_ENV; E++) begin : g_env
    localparam layout_e LAY = (E >= 3) ? LAYOUT_VAWA : LAYOUT_VASA;
    localparam bit DS  = (E == 2);
    localparam bit CFG = (E == 1) || (E == 2) || (E == 4);
    logic rst_n, init_done, cfg_we, req_valid, req_ready, req_we, rsp_valid, rsp_hit;
    logic shuffle_active, mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
    logic [7:0] cfg_addr;
    logic [15:0] cfg_wdata;
    logic [ADDR_W-1:0] req_addr, mem_req_addr;
    logic [DATA_W-1:0] req_wdata, rsp_data, mem_req_wdata, mem_rsp_data;
    logic [2:0] rsp_way;
    int mem_reads, mem_writes;
    int hits = 0, hit_cycles = 0, e_checks = 0, e_failures = 0;
    bit done = 0;

    cnfet_llc #(.LAYOUT(LAY), .DS_EN(DS), .SETS(SETS)) dut (.*);
    mem_model #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .LATENCY(30)) mem (
      .clk, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
      .mem_rsp_valid, .mem_rsp_data, .reads(mem_reads), .writes(mem_writes));

    task automatic cfg_write(input int a, input int d);
      @(negedge clk);
      cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = 16'(d);
      @(negedge clk);
      cfg_we = 0;
    endtask

    initial begin
      rst_n = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
      req_valid = 0; req_we = 0; req_addr = 0; req_wdata = '0;
      wait (trace_ready);
      repeat (3) @(negedge clk);
      rst_n = 1;
      while (!init_done) @(negedge clk);
      if (CFG) begin
        if (LAY == LAYOUT_VASA) begin
          for (int w = 0; w < 8; w++) cfg_write(w, way_lat[w]);
        end else begin
          for (int g = 0; g < 2; g++) begin
            cfg_write(8'h80 | (g << 6), seg_s[g]);
            cfg_write(8'h80 | (g << 6) | 1, seg_e[g]);
          end
        end
      end
      for (int op = 0; op < N_OPS; op++) begin
        int cyc, exp_lat, s;
        s = int'(trace[op] >> OFF_W) % SETS;
        @(negedge clk);
        req_valid = 1; req_addr = trace[op];
        while (!req_ready) @(negedge clk);
        @(negedge clk);
        req_valid = 0;
        cyc = 1;
        while (!rsp_valid && cyc < 200) begin @(negedge clk); cyc++; end
        e_checks++;
        if (!rsp_valid || rsp_data !== init_line(trace[op])) begin
          e_failures++;
          $display("FAIL env %0d op %0d: no response or wrong data", E, op);
        end
        if (rsp_valid && rsp_hit) begin
          hits++;
          hit_cycles += cyc;
          exp_lat = !CFG ? (LAY == LAYOUT_VASA ? 12 : 10)
                  : (LAY == LAYOUT_VASA ? way_lat[rsp_way] : set_lat(s));
          e_checks++;
          if (cyc != exp_lat) begin
            e_failures++;
            $display("FAIL env %0d op %0d: hit in %0d cycles, expected %0d", E, op, cyc, exp_lat);
          end
        end
        while (!req_ready) @(negedge clk);
      end
      done = 1;
    end
  end

  function automatic real avg(input int cyc, input int n);
    return n == 0 ? 0.0 : real'(cyc) / real'(n);
  endfunction

  task automatic expect_less(input real a, input real b, input string what);
    checks++;
    if (!(a < b)) begin
      failures++;
      $display("FAIL %s: %0.3f is not below %0.3f", what, a, b);
    end
  endtask

  initial begin
    real a [N_ENV];
    wait (g_env[0].done && g_env[1].done && g_env[2].done && g_env[3].done && g_env[4].done);
    checks   = g_env[0].e_checks + g_env[1].e_checks + g_env[2].e_checks + g_env[3].e_checks + g_env[4].e_checks;
    failures = g_env[0].e_failures + g_env[1].e_failures + g_env[2].e_failures + g_env[3].e_failures + g_env[4].e_failures;
    a[0] = avg(g_env[0].hit_cycles, g_env[0].hits);
    a[1] = avg(g_env[1].hit_cycles, g_env[1].hits);
    a[2] = avg(g_env[2].hit_cycles, g_env[2].hits);
    a[3] = avg(g_env[3].hit_cycles, g_env[3].hits);
    a[4] = avg(g_env[4].hit_cycles, g_env[4].hits);
    $display("average hit latency (hits of %0d reads):", N_OPS);
    $display("  %-30s %6.3f  (%0d hits)", "set aligned, worst timing", a[0], g_env[0].hits);
    $display("  %-30s %6.3f  (%0d hits)", "VASA", a[1], g_env[1].hits);
    $display("  %-30s %6.3f  (%0d hits)", "VASA + data shuffling", a[2], g_env[2].hits);
    $display("  %-30s %6.3f  (%0d hits)", "way aligned, worst timing", a[3], g_env[3].hits);
    $display("  %-30s %6.3f  (%0d hits)", "VAWA + non-uniform grouping", a[4], g_env[4].hits);
    checks++;
    if (g_env[0].hits == 0 || g_env[0].hits != g_env[1].hits) begin
      failures++;
      $display("FAIL worst-timing and VASA caches saw %0d and %0d hits", g_env[0].hits, g_env[1].hits);
    end
    expect_less(a[1], a[0], "VASA against worst timing");
    expect_less(a[2], a[1], "VASA+DS against VASA");
    expect_less(a[4], a[3], "VAWA+NG against worst timing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
