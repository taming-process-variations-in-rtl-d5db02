// tb_vasa_delay_regs: self-checking test of the per-way delay registers.
// Checks the worst-case value after reset, then loads a latency of 6..12
// cycles per way and checks that each one-hot hit vector selects its way's
// latency.
module tb_vasa_delay_regs;
  localparam int WAYS = 8, LAT_W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [2:0] cfg_way = 0;
  logic [LAT_W-1:0] cfg_lat = 0, lat;
  logic [WAYS-1:0] hit_vec = 0;

  vasa_delay_regs #(.WAYS(WAYS), .LAT_W(LAT_W), .RESET_LAT(12)) dut (.*);

  int checks = 0, failures = 0;
  int exp_lat [WAYS];

  task automatic expect_lat(input int e, input string what);
    checks++;
    if (lat !== LAT_W'(e)) begin
      failures++;
      $display("FAIL %s: lat=%0d expected %0d", what, lat, e);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < WAYS; w++) begin
      hit_vec = WAYS'(1) << w; #1;
      expect_lat(12, "reset");
    end
    for (int r = 0; r < 20; r++) begin
      for (int w = 0; w < WAYS; w++) begin
        exp_lat[w] = 6 + ($urandom % 7);
        @(negedge clk);
        cfg_we = 1; cfg_way = 3'(w); cfg_lat = LAT_W'(exp_lat[w]);
      end
      @(negedge clk) cfg_we = 0;
      for (int w = 0; w < WAYS; w++) begin
        hit_vec = WAYS'(1) << w; #1;
        expect_lat(exp_lat[w], "configured");
      end
      hit_vec = '0; #1;
      expect_lat(0, "no hit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
