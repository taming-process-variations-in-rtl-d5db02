// tb_way_array: self-checking test of one cache way (tag + data array).
// Writes random entries into a small array, reads them back through the
// synchronous read port and compares with a copy kept in the testbench; also
// checks that a read and a write of the same set at one edge return the old
// entry and that the read output holds between reads.
module tb_way_array;
  localparam int SETS = 64, TAG_W = 14, DATA_W = 512, IDX_W = 6;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en = 0, wr_en = 0, wr_valid = 0, rd_valid;
  logic [IDX_W-1:0] rd_idx = 0, wr_idx = 0;
  logic [TAG_W-1:0] rd_tag, wr_tag = 0;
  logic [DATA_W-1:0] rd_data, wr_data = 0;

  way_array #(.SETS(SETS), .TAG_W(TAG_W), .DATA_W(DATA_W)) dut (.*);

  int checks = 0, failures = 0;
  logic              m_valid [SETS];
  logic [TAG_W-1:0]  m_tag   [SETS];
  logic [DATA_W-1:0] m_data  [SETS];

  function automatic logic [DATA_W-1:0] rnd_line();
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  task automatic check_read(input int idx);
    if (rd_valid !== m_valid[idx] || rd_tag !== m_tag[idx] || rd_data !== m_data[idx]) begin
      failures++;
      $display("FAIL set %0d: got v=%0d tag=%h", idx, rd_valid, rd_tag);
    end
    checks++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every set
    for (int i = 0; i < SETS; i++) begin
      m_valid[i] = ($urandom % 4) != 0;
      m_tag[i]   = TAG_W'($urandom);
      m_data[i]  = rnd_line();
      @(negedge clk);
      wr_en = 1; wr_idx = IDX_W'(i); wr_valid = m_valid[i]; wr_tag = m_tag[i]; wr_data = m_data[i];
    end
    @(negedge clk) wr_en = 0;
    // read back in random order
    for (int n = 0; n < 200; n++) begin
      int idx;
      idx = $urandom % SETS;
      rd_en = 1; rd_idx = IDX_W'(idx);
      @(negedge clk) rd_en = 0;
      check_read(idx);
      // output holds while rd_en is low
      @(negedge clk);
      check_read(idx);
    end
    // read-during-write of the same set returns the old entry
    for (int n = 0; n < 50; n++) begin
      int idx;
      idx = $urandom % SETS;
      rd_en = 1; rd_idx = IDX_W'(idx);
      wr_en = 1; wr_idx = IDX_W'(idx); wr_valid = 1; wr_tag = TAG_W'($urandom); wr_data = rnd_line();
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      check_read(idx);
      m_valid[idx] = 1; m_tag[idx] = wr_tag; m_data[idx] = wr_data;
      rd_en = 1;
      @(negedge clk) rd_en = 0;
      check_read(idx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
