// tb_ds_controller: self-checking test of latency-aware data shuffling.
//
// Part 1 replays the four scenarios of the shuffling example (hit in way 1,
// hit in way 3, hit in way 7, miss) and checks the T bits after each and which
// block ends up in which way. Part 2 runs random hits and misses on a few sets
// and checks the plan, applied to a model of the set's contents, against a
// reference that moves the blocks directly: the accessed block goes to the
// T=1 way of group 0, each group's T=1 block moves one group down until the
// group of the hit, and every receiving way gets T=0.
module tb_ds_controller;
  localparam int WAYS = 8, SETS = 8, GROUPS = 4;
  localparam int NEW = 1000;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en = 0, upd_en = 0, init_en = 0, hit = 0;
  logic [2:0] rd_idx = 0, upd_idx = 0, init_idx = 0, hit_way = 0, victim;
  logic [WAYS-1:0] t_q, t_new, way_wr, way_from_new;
  logic [GROUPS-1:0] buf_load;
  logic [2:0] buf_src [GROUPS];
  logic [1:0] way_buf [WAYS];
  logic shuffle;

  ds_controller #(.WAYS(WAYS), .SETS(SETS)) dut (.*);

  int checks = 0, failures = 0;
  int content [SETS][WAYS];    // block id held by each way
  logic [WAYS-1:0] tref [SETS];
  int n_depth [GROUPS+1];      // accesses per cascade depth (GROUPS = miss)

  function automatic logic [WAYS-1:0] tvec(input int t0, t1, t2, t3, t4, t5, t6, t7);
    return {t7[0], t6[0], t5[0], t4[0], t3[0], t2[0], t1[0], t0[0]};
  endfunction

  // Apply the DUT's plan to the content model of set s.
  task automatic apply_plan(input int s, output int evicted);
    int bufs [GROUPS];
    int nc [WAYS];
    for (int g = 0; g < GROUPS; g++) bufs[g] = buf_load[g] ? content[s][buf_src[g]] : -1;
    for (int w = 0; w < WAYS; w++)
      nc[w] = !way_wr[w] ? content[s][w] : way_from_new[w] ? NEW : bufs[way_buf[w]];
    evicted = hit ? -1 : content[s][victim];
    for (int w = 0; w < WAYS; w++) content[s][w] = nc[w];
  endtask

  // One access: read T, present the outcome, check, write T back.
  task automatic access(input int s, input bit is_hit, input int w, output int evicted);
    @(negedge clk);
    rd_en = 1; rd_idx = 3'(s);
    @(negedge clk);
    rd_en = 0; hit = is_hit; hit_way = 3'(w);
    #1;
    apply_plan(s, evicted);
    upd_en = 1; upd_idx = 3'(s);
    @(negedge clk);
    upd_en = 0;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Reference: move blocks directly.
  task automatic ref_access(input int s, input bit is_hit, input int w, output int evicted);
    int h, blk, nxt, dst;
    h = is_hit ? w / 2 : GROUPS;
    n_depth[h]++;
    blk = is_hit ? content_ref[s][w] : NEW;
    evicted = -1;
    for (int g = 0; g < GROUPS && g < h; g++) begin
      dst = tref[s][2*g] ? 2*g : 2*g + 1;
      nxt = content_ref[s][dst];
      content_ref[s][dst] = blk;
      tref[s][dst] = 0; tref[s][dst ^ 1] = 1;
      blk = nxt;
    end
    if (is_hit) begin
      if (h > 0) content_ref[s][w] = blk;
      tref[s][w] = 0; tref[s][w ^ 1] = 1;
    end else begin
      evicted = blk;
    end
  endtask
  int content_ref [SETS][WAYS];

  initial begin
    int ev, ev_ref, blk_id;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      init_en = 1; init_idx = 3'(s);
      for (int w = 0; w < WAYS; w++) begin content[s][w] = s * 10 + w; content_ref[s][w] = s * 10 + w; end
      tref[s] = tvec(0, 1, 0, 1, 0, 1, 0, 1);
    end
    @(negedge clk) init_en = 0;

    // ---- Part 1: the four printed scenarios -------------------------------
    // (a) hit in way 1 of group 0: no move, T of ways 0/1 swap
    access(0, 1, 1, ev);
    check(!shuffle && t_new == tvec(1, 0, 0, 1, 0, 1, 0, 1), "(a) T bits / no shuffle");
    // (b) from the state after (a), hit in way 3: ways 0 and 3 exchange blocks
    access(0, 1, 3, ev);
    check(t_new == tvec(0, 1, 1, 0, 0, 1, 0, 1), "(b) T bits");
    check(content[0][0] == 3 && content[0][3] == 0 && content[0][1] == 1 && content[0][7] == 7, "(b) blocks");
    // (c) hit in way 7 with T = 0,1,0,1,...: 7->1, 1->3, 3->5, 5->7
    access(1, 1, 7, ev);
    check(t_new == tvec(1, 0, 1, 0, 1, 0, 1, 0), "(c) T bits");
    check(content[1][1] == 17 && content[1][3] == 11 && content[1][5] == 13 && content[1][7] == 15
          && content[1][0] == 10 && content[1][6] == 16, "(c) blocks");
    // (d) miss with T = 0,1,0,1,...: new -> 1, 1->3, 3->5, 5->7, old 7 evicted
    access(2, 0, 0, ev);
    check(t_new == tvec(1, 0, 1, 0, 1, 0, 1, 0), "(d) T bits");
    check(content[2][1] == NEW && content[2][3] == 21 && content[2][5] == 23 && content[2][7] == 25
          && ev == 27, "(d) blocks and victim");

    // ---- Part 2: random accesses against the reference --------------------
    // replay part 1 on the reference first
    ref_access(0, 1, 1, ev_ref); ref_access(0, 1, 3, ev_ref);
    ref_access(1, 1, 7, ev_ref); ref_access(2, 0, 0, ev_ref);
    for (int g = 0; g <= GROUPS; g++) n_depth[g] = 0;
    blk_id = 2000;
    for (int n = 0; n < 2000; n++) begin
      int s, w;
      bit h;
      s = $urandom % 4;
      h = ($urandom % 4) != 0;
      w = $urandom % WAYS;
      ref_access(s, h, w, ev_ref);
      access(s, h, w, ev);
      // new blocks get fresh ids in both models
      for (int x = 0; x < WAYS; x++) begin
        if (content[s][x] == NEW) content[s][x] = blk_id;
        if (content_ref[s][x] == NEW) content_ref[s][x] = blk_id;
      end
      blk_id++;
      checks++;
      if (content[s] != content_ref[s] || t_new != tref[s] || ev != ev_ref) begin
        failures++;
        $display("FAIL n=%0d set %0d hit=%0d way=%0d t_new=%b ref=%b", n, s, h, w, t_new, tref[s]);
      end
    end
    for (int g = 0; g <= GROUPS; g++) begin
      check(n_depth[g] > 0, "every cascade depth exercised");
    end
    $display("accesses by group of hit (4 = miss): %0d %0d %0d %0d %0d",
             n_depth[0], n_depth[1], n_depth[2], n_depth[3], n_depth[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
