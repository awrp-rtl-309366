// tb_awrp_tag_match: random sets of stored addresses and valid bits, looked
// up with addresses from a small range so that hits, misses and matches on
// invalid ways all occur. The expected hit and lowest matching way are
// computed in the testbench.
module tb_awrp_tag_match;
  localparam int unsigned WAYS  = 12;
  localparam int unsigned TAG_W = 10;
  localparam int unsigned WAY_W = $clog2(WAYS);
  logic [TAG_W-1:0] tags [WAYS];
  logic [WAYS-1:0]  valid;
  logic [TAG_W-1:0] lookup_tag;
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  int checks = 0;
  int failures = 0;
  int n_hit = 0;
  int n_miss = 0;

  awrp_tag_match #(.WAYS(WAYS), .TAG_W(TAG_W)) dut (
    .tags(tags), .valid(valid), .lookup_tag(lookup_tag), .hit(hit), .hit_way(hit_way));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      bit exp_hit;
      int exp_way;
      exp_hit = 0;
      exp_way = 0;
      for (int i = 0; i < int'(WAYS); i++) begin
        tags[i]  = TAG_W'($urandom_range(20));
        valid[i] = ($urandom_range(3) != 0);
      end
      // Upper half of the runs use a large, distinct address space too.
      lookup_tag = (t % 2 == 0) ? TAG_W'($urandom_range(20)) : TAG_W'($urandom);
      for (int i = int'(WAYS) - 1; i >= 0; i--)
        if (valid[i] && tags[i] == lookup_tag) begin exp_hit = 1; exp_way = i; end
      #1;
      checks++;
      if (hit !== exp_hit || (exp_hit && hit_way !== WAY_W'(exp_way))) begin
        failures++;
        $display("FAIL t=%0d hit=%0b way=%0d expected %0b/%0d", t, hit, hit_way, exp_hit, exp_way);
      end
      if (exp_hit) n_hit++; else n_miss++;
    end
    checks++;
    if (n_hit == 0 || n_miss == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
