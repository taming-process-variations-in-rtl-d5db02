// llc_checker: stimulus and reference model for end-to-end tests of cnfet_llc
// (not synthesizable).
//
// After reset it waits for the cache's valid-bit sweep, writes the latency
// configuration, then issues N_OPS random line reads and writes over a small
// pool of addresses (a few sets, more tags than ways, so that hits, misses and
// evictions all occur). A reference model kept here, independently of the
// RTL, predicts for every request whether it hits, in which way, the exact
// latency in cycles and the data returned:
//   VASA: per-way latencies; blocks move as in latency-aware data shuffling
//         (accessed block to the T=1 way of group 0, cascade down to the hit
//         group, new lines enter the same way and push the last group's T=1
//         block out).
//   VAWA: per-set latency from the configured runs (L1 = 6, L2 = 7, else 10);
//         true LRU replacement, no block moves.
//   VASA with DS = 0: per-way latencies with true LRU replacement and no
//         block moves (the set-aligned cache without data shuffling).
// Writes are write-through and do not allocate; the number of memory writes is
// checked too. Mechanism counters are exported so the testbench can require
// that each one happened.
module llc_checker
  import llc_pkg::*;
#(
  parameter layout_e     LAYOUT = LAYOUT_VASA,
  parameter bit          DS     = 1'b1,
  parameter int unsigned SETS   = 64,
  parameter int unsigned N_OPS  = 1500,
  parameter int unsigned N_SETS_USED = 4,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 512,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned OFF_W = 6
) (
  input  logic              clk,
  output logic              rst_n,
  input  logic              init_done,
  output logic              cfg_we,
  output logic [7:0]        cfg_addr,
  output logic [15:0]       cfg_wdata,
  output logic              req_valid,
  input  logic              req_ready,
  output logic              req_we,
  output logic [ADDR_W-1:0] req_addr,
  output logic [DATA_W-1:0] req_wdata,
  input  logic              rsp_valid,
  input  logic [DATA_W-1:0] rsp_data,
  input  logic              rsp_hit,
  input  logic [2:0]        rsp_way,
  input  logic              shuffle_active,
  input  int                mem_writes,
  output logic              done,
  output int                checks,
  output int                failures,
  output int                ev [16]   // mechanism counters, see EV_* below
);

  // mechanism counter indices
  localparam int EV_HIT_G0 = 0, EV_HIT_G1 = 1, EV_HIT_G2 = 2, EV_HIT_G3 = 3;
  localparam int EV_MISS = 4, EV_EVICT = 5, EV_WR_HIT = 6, EV_WR_MISS = 7;
  localparam int EV_SHUFFLE = 8, EV_HIT_L1 = 9, EV_HIT_L2 = 10, EV_HIT_LMAX = 11;
  localparam int EV_INIT = 12;
  localparam bit SHUF = (LAYOUT == LAYOUT_VASA) && DS;

  int way_lat [WAYS] = '{6, 7, 8, 8, 9, 10, 12, 11};
  int seg_s [2][4] = '{'{0, 20, 0, 0}, '{8, 40, 0, 0}};
  int seg_e [2][4] = '{'{8, 24, 0, 0}, '{16, 48, 0, 0}};

  // reference cache state
  logic [ADDR_W-1:0] ref_line [SETS][WAYS];   // line address held, valid if ref_v
  bit                ref_v    [SETS][WAYS];
  bit                ref_t    [SETS][WAYS];   // VASA priority bits
  int                ref_age  [SETS][WAYS];   // VAWA LRU ages (0 = most recent)
  logic [DATA_W-1:0] golden   [logic [ADDR_W-1:0]];
  int                exp_mem_writes = 0;

  function automatic logic [DATA_W-1:0] init_line(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = (a * 32'h9E37_79B1) ^ (i * 32'h0101_0101);
    return d;
  endfunction

  function automatic int set_lat(input int s);
    for (int g = 0; g < 2; g++)
      for (int p = 0; p < 4; p++)
        if (s >= seg_s[g][p] && s < seg_e[g][p]) return g == 0 ? 6 : 7;
    return 10;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL [%s] %s", LAYOUT == LAYOUT_VASA ? "VASA" : "VAWA", msg);
  endtask

  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // VASA reference: move the accessed (or new) line down the group chain.
  task automatic ref_vasa(input int s, input int hw, input logic [ADDR_W-1:0] line, output bit evicted);
    int h, dst;
    logic [ADDR_W-1:0] blk, nxt;
    bit bv, nv;
    h = (hw >= 0) ? hw / 2 : WAYS / 2;
    blk = (hw >= 0) ? ref_line[s][hw] : line;
    bv  = 1;
    evicted = 0;
    for (int g = 0; g < h; g++) begin
      dst = ref_t[s][2*g] ? 2*g : 2*g + 1;
      nxt = ref_line[s][dst]; nv = ref_v[s][dst];
      ref_line[s][dst] = blk; ref_v[s][dst] = bv;
      ref_t[s][dst] = 0; ref_t[s][dst ^ 1] = 1;
      blk = nxt; bv = nv;
    end
    if (hw >= 0) begin
      if (h > 0) begin ref_line[s][hw] = blk; ref_v[s][hw] = bv; end
      ref_t[s][hw] = 0; ref_t[s][hw ^ 1] = 1;
    end else begin
      evicted = bv;
    end
  endtask

  task automatic ref_touch(input int s, input int w);
    for (int x = 0; x < WAYS; x++) if (ref_age[s][x] < ref_age[s][w]) ref_age[s][x]++;
    ref_age[s][w] = 0;
  endtask

  initial begin
    rst_n = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = '0;
    done = 0; checks = 0; failures = 0;
    for (int i = 0; i < 16; i++) ev[i] = 0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        ref_v[s][w] = 0; ref_line[s][w] = '0; ref_t[s][w] = w[0]; ref_age[s][w] = w;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    begin
      int n;
      n = 0;
      while (!init_done) begin @(negedge clk); n++; end
      checks++;
      if (n != SETS) fail($sformatf("valid-bit sweep took %0d cycles, expected %0d", n, SETS));
      else ev[EV_INIT]++;
    end
    if (LAYOUT == LAYOUT_VASA) begin
      for (int w = 0; w < WAYS; w++) cfg_write(w, way_lat[w]);
    end else begin
      for (int g = 0; g < 2; g++)
        for (int p = 0; p < 4; p++) begin
          cfg_write(8'h80 | (g << 6) | (p << 1), seg_s[g][p]);
          cfg_write(8'h80 | (g << 6) | (p << 1) | 1, seg_e[g][p]);
        end
    end

    for (int op = 0; op < N_OPS; op++) begin
      int s, tagv, hw, lat, cyc, exp_lat;
      bit we, evicted;
      logic [ADDR_W-1:0] line;
      logic [DATA_W-1:0] wd;
      // sets: a few from each latency class; tags: 12 per set for 8 ways
      s = (LAYOUT == LAYOUT_VASA) ? ($urandom % N_SETS_USED)
          : ((op % 3 == 0) ? 2 + ($urandom % 4) : (op % 3 == 1) ? 10 + ($urandom % 4) : 30 + ($urandom % 4));
      s = s % SETS;
      tagv = $urandom % 12;
      line = ADDR_W'((tagv * SETS + s) << OFF_W);
      we = ($urandom % 5) == 0;
      for (int i = 0; i < DATA_W / 32; i++) wd[i*32 +: 32] = $urandom;
      hw = -1;
      for (int w = 0; w < WAYS; w++) if (ref_v[s][w] && ref_line[s][w] == line) hw = w;

      @(negedge clk);
      req_valid = 1; req_we = we; req_addr = line; req_wdata = wd;
      while (!req_ready) @(negedge clk);
      @(negedge clk);
      req_valid = 0;
      cyc = 1;
      while (!rsp_valid && cyc < 200) begin @(negedge clk); cyc++; end

      checks++;
      if (!rsp_valid) begin fail($sformatf("op %0d: no response", op)); continue; end
      if (rsp_hit !== (hw >= 0)) fail($sformatf("op %0d set %0d: hit=%0d expected %0d", op, s, rsp_hit, hw >= 0));
      if (hw >= 0) begin
        exp_lat = (LAYOUT == LAYOUT_VASA) ? way_lat[hw] : set_lat(s);
        checks++;
        if (rsp_way !== 3'(hw) || cyc != exp_lat)
          fail($sformatf("op %0d set %0d: way %0d in %0d cycles, expected way %0d in %0d", op, s, rsp_way, cyc, hw, exp_lat));
      end else if (!we) begin
        checks++;
        if (cyc < 32) fail($sformatf("op %0d: miss answered after %0d cycles", op, cyc));
      end
      if (!we) begin
        checks++;
        if (rsp_data !== (golden.exists(line) ? golden[line] : init_line(line)))
          fail($sformatf("op %0d set %0d: wrong read data", op, s));
      end

      // update the reference
      if (we) begin
        golden[line] = wd;
        exp_mem_writes++;
        if (hw >= 0) ev[EV_WR_HIT]++; else ev[EV_WR_MISS]++;
      end else if (hw < 0) begin
        ev[EV_MISS]++;
      end
      if (hw >= 0) begin
        if (LAYOUT == LAYOUT_VASA) begin
          ev[EV_HIT_G0 + hw / 2]++;
        end
        if (SHUF) begin
          if (hw >= 2) ev[EV_SHUFFLE]++;
          ref_vasa(s, hw, line, evicted);
        end else begin
          if (LAYOUT == LAYOUT_VAWA) begin
            lat = set_lat(s);
            ev[lat == 6 ? EV_HIT_L1 : lat == 7 ? EV_HIT_L2 : EV_HIT_LMAX]++;
          end
          ref_touch(s, hw);
        end
      end else if (!we) begin
        if (SHUF) begin
          ref_vasa(s, -1, line, evicted);
          ev[EV_SHUFFLE]++;
        end else begin
          int vw;
          vw = 0;
          for (int w = 0; w < WAYS; w++) if (ref_age[s][w] == WAYS - 1) vw = w;
          evicted = ref_v[s][vw];
          ref_line[s][vw] = line; ref_v[s][vw] = 1;
          ref_touch(s, vw);
        end
        if (evicted) ev[EV_EVICT]++;
      end
      // let the cache finish (shuffle, write-through) before the next request
      while (!req_ready) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (mem_writes != exp_mem_writes)
      fail($sformatf("memory saw %0d writes, expected %0d", mem_writes, exp_mem_writes));
    done = 1;
  end

  // shuffle cycles seen at the port
  int sh_cycles = 0;
  always @(posedge clk) if (shuffle_active) sh_cycles <= sh_cycles + 1;

endmodule
