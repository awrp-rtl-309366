// tb_awrp_victim_select: random candidate streams, some with deliberate
// ties and gaps (in_valid low), checked against a running minimum kept in the
// testbench with first-seen-wins on ties.
module tb_awrp_victim_select;
  localparam int unsigned WAYS = 20, WW = 12, WAY_W = $clog2(WAYS);
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, in_valid = 1'b0;
  logic [WAY_W-1:0] in_way = '0;
  logic [WW-1:0] in_w = '0;
  logic min_found;
  logic [WAY_W-1:0] min_way;
  logic [WW-1:0] min_w;
  int checks = 0, failures = 0, ties = 0;

  awrp_victim_select #(.WAYS(WAYS), .WW(WW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .in_valid(in_valid), .in_way(in_way),
    .in_w(in_w), .min_found(min_found), .min_way(min_way), .min_w(min_w));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 300; s++) begin
      bit     e_found;
      int     e_way;
      longint e_w;
      e_found = 0;
      e_way = 0;
      e_w = 0;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int i = 0; i < int'(WAYS); i++) begin
        in_valid = ($urandom_range(4) != 0);
        in_way   = WAY_W'(i);
        in_w     = WW'($urandom_range((s % 3 == 0) ? 3 : 4095));
        if (in_valid) begin
          if (e_found && longint'(in_w) == e_w) ties++;
          if (!e_found || longint'(in_w) < e_w) begin
            e_found = 1; e_way = i; e_w = longint'(in_w);
          end
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      checks++;
      if (min_found !== e_found || (e_found && (min_way !== WAY_W'(e_way) || min_w !== WW'(e_w)))) begin
        failures++;
        $display("FAIL stream %0d: %0b/%0d/%0d expected %0b/%0d/%0d", s, min_found, min_way, min_w, e_found, e_way, e_w);
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no ties exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
