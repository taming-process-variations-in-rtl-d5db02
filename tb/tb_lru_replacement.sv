// tb_lru_replacement: self-checking test of the LRU state. Runs random
// accesses over a few sets against a reference that keeps each set's ways in
// recency order, and checks the victim (least recently used way) after every
// read.
module tb_lru_replacement;
  localparam int WAYS = 8, SETS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, upd_en = 0, init_en = 0;
  logic [3:0] rd_idx = 0, upd_idx = 0, init_idx = 0;
  logic [2:0] upd_way = 0, victim;

  lru_replacement #(.WAYS(WAYS), .SETS(SETS)) dut (.*);

  int checks = 0, failures = 0;
  int order [SETS][$];   // front = most recent

  initial begin
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      init_en = 1; init_idx = 4'(s);
      order[s] = {};
      for (int w = 0; w < WAYS; w++) order[s].push_back(w);
    end
    @(negedge clk) init_en = 0;
    for (int n = 0; n < 3000; n++) begin
      int s, w;
      s = $urandom % SETS;
      w = ($urandom % 3 == 0) ? order[s][WAYS-1] : $urandom % WAYS;
      rd_en = 1; rd_idx = 4'(s);
      @(negedge clk) rd_en = 0;
      checks++;
      if (victim !== 3'(order[s][WAYS-1])) begin
        failures++;
        $display("FAIL set %0d victim %0d expected %0d", s, victim, order[s][WAYS-1]);
      end
      upd_en = 1; upd_idx = 4'(s); upd_way = 3'(w);
      @(negedge clk) upd_en = 0;
      foreach (order[s][i]) if (order[s][i] == w) begin order[s].delete(i); break; end
      order[s].push_front(w);
    end
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
