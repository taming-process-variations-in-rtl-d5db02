// tb_delay_controller: self-checking test of the output-enable timing.
// For latencies 2..15 and for latency information arriving in cycle 1 or 2 of
// the access, checks that enable rises exactly at the lat-th edge after the
// start edge, only once, and that cancel ends an access without enable.
module tb_delay_controller;
  localparam int LAT_W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, cancel = 0, lat_valid = 0;
  logic [LAT_W-1:0] lat = 0, count;
  logic enable, busy;

  delay_controller #(.LAT_W(LAT_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 2; l < 16; l++) begin
      for (int arrive = 1; arrive <= 2; arrive++) begin
        int fired_at, fires;
        fired_at = -1; fires = 0;
        // start is high during cycle 0; the edge at its end is edge 0
        @(negedge clk);
        start = 1; lat = LAT_W'(l); lat_valid = 0;
        @(negedge clk);
        start = 0;
        // cycle c (1, 2, ...) lies between edge c-1 and edge c
        for (int c = 1; c < 20; c++) begin
          lat_valid = (c >= arrive);
          #1;
          if (enable) begin fires++; fired_at = c; end
          @(negedge clk);
        end
        lat_valid = 0;
        checks++;
        if (fires != 1 || fired_at != l) begin
          failures++;
          $display("FAIL lat=%0d arrive=%0d fired %0d times at cycle %0d", l, arrive, fires, fired_at);
        end
      end
    end
    // cancel: no enable at all
    @(negedge clk);
    start = 1; lat = 4'd6;
    @(negedge clk);
    start = 0; cancel = 1;
    @(negedge clk);
    cancel = 0; lat_valid = 1;
    begin
      int fires;
      fires = 0;
      for (int c = 0; c < 20; c++) begin #1; if (enable) fires++; @(negedge clk); end
      checks++;
      if (fires != 0 || busy) begin failures++; $display("FAIL cancel: %0d fires", fires); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
