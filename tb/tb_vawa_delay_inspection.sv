// tb_vawa_delay_inspection: self-checking test of the VAWA set-latency lookup.
// Loads random (start, end) runs for the L1 and L2 groups, then looks up
// random set indices. For each lookup it checks, against a reference search
// of the same runs, the latency (L1 = 6, L2 = 7, Lmax = 10 cycles) and the
// cycle in which it becomes valid: cycle 1 for an L1 set, cycle 2 otherwise,
// since the groups share one row of comparators and are searched in turn.
module tb_vawa_delay_inspection;
  localparam int IDX_W = 12, PAIRS = 16, LAT_W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_seg_we = 0, cfg_grp = 0, cfg_end = 0, cfg_lat_we = 0;
  logic [3:0] cfg_pair = 0;
  logic [IDX_W-1:0] cfg_idx = 0, set_idx = 0;
  logic [1:0] cfg_lat_sel = 0, group;
  logic [LAT_W-1:0] cfg_lat = 0, lat;
  logic start = 0, lat_valid;

  vawa_delay_inspection #(.IDX_W(IDX_W), .PAIRS(PAIRS), .LAT_W(LAT_W),
    .RESET_L1(6), .RESET_L2(7), .RESET_MAX(10)) dut (.*);

  int checks = 0, failures = 0;
  int seg_s [2][PAIRS], seg_e [2][PAIRS];
  int n_l1 = 0, n_l2 = 0, n_max = 0;

  function automatic int ref_group(input int idx);
    for (int g = 0; g < 2; g++)
      for (int p = 0; p < PAIRS; p++)
        if (idx >= seg_s[g][p] && idx < seg_e[g][p]) return g;
    return 2;
  endfunction

  task automatic write_seg(input int g, input int p, input int s, input int e);
    @(negedge clk);
    cfg_seg_we = 1; cfg_grp = g[0]; cfg_pair = 4'(p); cfg_end = 0; cfg_idx = IDX_W'(s);
    @(negedge clk);
    cfg_end = 1; cfg_idx = IDX_W'(e);
    @(negedge clk);
    cfg_seg_we = 0;
    seg_s[g][p] = s; seg_e[g][p] = e;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // non-overlapping runs: group 0 in the lower half, group 1 in the upper half
    for (int g = 0; g < 2; g++)
      for (int p = 0; p < PAIRS; p++) begin
        int s, len;
        s   = g * 2048 + p * 128 + ($urandom % 32);
        len = 1 + ($urandom % 64);
        write_seg(g, p, s, s + len);
      end
    for (int n = 0; n < 600; n++) begin
      int idx, eg, cyc;
      idx = (n % 3 == 0) ? ($urandom % 4096)
                         : seg_s[n % 2][$urandom % PAIRS] + ($urandom % 40);
      if (idx > 4095) idx = 4095;
      eg = ref_group(idx);
      @(negedge clk);
      start = 1; set_idx = IDX_W'(idx);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!lat_valid && cyc < 5) begin @(negedge clk); cyc++; end
      checks++;
      if (lat !== LAT_W'(eg == 0 ? 6 : eg == 1 ? 7 : 10) || group !== 2'(eg)
          || cyc != (eg == 0 ? 1 : 2)) begin
        failures++;
        $display("FAIL idx=%0d exp group %0d: got group %0d lat %0d in cycle %0d", idx, eg, group, lat, cyc);
      end
      if (eg == 0) n_l1++; else if (eg == 1) n_l2++; else n_max++;
    end
    // reprogram the latency registers and check one set of each group
    @(negedge clk);
    cfg_lat_we = 1; cfg_lat_sel = 0; cfg_lat = 4'd5;
    @(negedge clk) cfg_lat_sel = 2; cfg_lat = 4'd12;
    @(negedge clk) cfg_lat_we = 0;
    foreach (seg_s[g, p]) if (p == 0) begin
      @(negedge clk) start = 1; set_idx = IDX_W'(seg_s[g][0]);
      @(negedge clk) start = 0;
      @(negedge clk);
      checks++;
      if (lat !== (g == 0 ? 4'd5 : 4'd7)) begin failures++; $display("FAIL relat g%0d %0d", g, lat); end
    end
    @(negedge clk) start = 1; set_idx = 12'd4095;
    @(negedge clk) start = 0;
    @(negedge clk);
    checks++;
    if (lat !== 4'd12 || ref_group(4095) != 2) begin failures++; $display("FAIL relat max %0d", lat); end
    if (n_l1 == 0 || n_l2 == 0 || n_max == 0) begin failures++; $display("FAIL group not exercised"); end
    $display("groups looked up: L1 %0d, L2 %0d, Lmax %0d", n_l1, n_l2, n_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
