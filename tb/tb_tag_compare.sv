// tb_tag_compare: self-checking test of the parallel tag comparators and the
// one-hot hit vector. Random tags, valid bits and request tags (with a forced
// match in most rounds) are checked against a reference loop.
module tb_tag_compare;
  localparam int WAYS = 8, TAG_W = 14;
  logic [TAG_W-1:0] req_tag;
  logic [TAG_W-1:0] way_tag [WAYS];
  logic             way_valid [WAYS];
  logic [WAYS-1:0]  hit_vec;
  logic             hit;
  logic [2:0]       hit_way;

  tag_compare #(.WAYS(WAYS), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [WAYS-1:0] exp_vec;
      int exp_way;
      // distinct tags per way so at most one can match
      for (int w = 0; w < WAYS; w++) begin
        way_tag[w]   = TAG_W'((n * 8 + w) * 37 + ($urandom % 8) * 4096);
        way_valid[w] = ($urandom % 4) != 0;
      end
      req_tag = ($urandom % 4 != 0) ? way_tag[$urandom % WAYS] : TAG_W'($urandom);
      #1;
      exp_vec = '0; exp_way = 0;
      for (int w = 0; w < WAYS; w++)
        if (way_valid[w] && way_tag[w] == req_tag) begin exp_vec[w] = 1; exp_way = w; end
      checks++;
      if (hit_vec !== exp_vec || hit !== (exp_vec != 0) || (hit && hit_way !== 3'(exp_way))) begin
        failures++;
        $display("FAIL n=%0d vec=%b exp=%b way=%0d", n, hit_vec, exp_vec, hit_way);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
