// tb_awrp_set: drives one AWRP set with a skewed random reference stream and
// compares every response (hit, way, displaced address), its latency, and
// afterwards the valid bit, F, R and stored W of every block with the
// reference model. The access clock starts just below its wrap point so
// ages are formed across the wrap, and F is 3 bits wide so it saturates.
module tb_awrp_set;
  import awrp_ref_pkg::*;
  localparam int unsigned WAYS = 8, TAG_W = 16, NW = 16, FW = 3, FRAC = 16;
  localparam int unsigned WAY_W = $clog2(WAYS), WW = FW + FRAC;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NW-1:0] n = '0;
  logic req_valid = 1'b0;
  logic [TAG_W-1:0] req_tag = '0;
  logic busy, resp_valid, resp_hit, resp_evict;
  logic [WAY_W-1:0] resp_way;
  logic [TAG_W-1:0] resp_evict_tag;
  logic [WAY_W-1:0] peek_way = '0;
  logic peek_valid;
  logic [TAG_W-1:0] peek_tag;
  logic [FW-1:0] peek_f;
  logic [NW-1:0] peek_r;
  logic [WW-1:0] peek_w;

  int checks = 0, failures = 0;
  int n_hit = 0, n_fill = 0, n_evict = 0, n_sat = 0, n_wrap = 0;

  awrp_set #(.WAYS(WAYS), .TAG_W(TAG_W), .NW(NW), .FW(FW), .FRAC(FRAC)) dut (
    .clk(clk), .rst_n(rst_n), .n(n), .req_valid(req_valid), .req_tag(req_tag),
    .busy(busy), .resp_valid(resp_valid), .resp_hit(resp_hit), .resp_way(resp_way),
    .resp_evict(resp_evict), .resp_evict_tag(resp_evict_tag),
    .peek_way(peek_way), .peek_valid(peek_valid), .peek_tag(peek_tag), .peek_f(peek_f), .peek_r(peek_r),
    .peek_w(peek_w));

  always #5 clk = ~clk;

  awrp_set_model model;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint nn = 65536 - 300;
    model = new(WAYS, FW, NW, FRAC);
    repeat (2) @(posedge clk);
    #1 checks++;
    for (int i = 0; i < int'(WAYS); i++) begin
      peek_way = WAY_W'(i);
      #1;
      if (peek_valid || peek_f != 0 || peek_r != 0 || peek_w != 0) begin
        failures++; $display("FAIL reset state of way %0d", i);
      end
    end
    rst_n = 1'b1;
    for (int t = 0; t < 1200; t++) begin
      longint a;
      bit e_hit, e_evict;
      int e_way, lat;
      longint e_etag;
      int unsigned p;
      p = $urandom_range(99);
      a = (p < 60) ? longint'($urandom_range(5)) : longint'($urandom_range(30)) + 6;
      nn = (nn + 1) & 64'hFFFF;
      if (nn == 0) n_wrap++;
      model.access(a, nn, e_hit, e_way, e_evict, e_etag);
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy before request %0d", t); end
      n = NW'(nn);
      req_valid = 1'b1;
      req_tag = TAG_W'(a);
      @(negedge clk);
      req_valid = 1'b0;
      lat = 1;
      while (!resp_valid && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (!resp_valid || resp_hit !== e_hit || resp_way !== WAY_W'(e_way) ||
          resp_evict !== e_evict || (e_evict && resp_evict_tag !== TAG_W'(e_etag))) begin
        failures++;
        $display("FAIL ref %0d addr %0d: hit=%0b way=%0d ev=%0b etag=%0d expected %0b/%0d/%0b/%0d",
                 t, a, resp_hit, resp_way, resp_evict, resp_evict_tag, e_hit, e_way, e_evict, e_etag);
      end
      checks++;
      if (lat != (e_hit ? 2 : int'(WAYS) + 3)) begin
        failures++; $display("FAIL ref %0d latency %0d", t, lat);
      end
      if (e_hit) n_hit++; else if (e_evict) n_evict++; else n_fill++;
      if (e_hit && model.f[e_way] == 7) n_sat++;
      for (int i = 0; i < int'(WAYS); i++) begin
        peek_way = WAY_W'(i);
        #1 checks++;
        if (peek_valid !== model.valid[i] || peek_f !== FW'(model.f[i]) ||
            (model.valid[i] && peek_tag !== TAG_W'(model.tag[i])) ||
            peek_r !== NW'(model.r[i]) || peek_w !== WW'(model.w[i])) begin
          failures++;
          $display("FAIL ref %0d way %0d: v=%0b F=%0d R=%0d W=%0d expected %0b/%0d/%0d/%0d", t, i,
                   peek_valid, peek_f, peek_r, peek_w, model.valid[i], model.f[i], model.r[i], model.w[i]);
        end
      end
    end
    $display("hits=%0d cold_fills=%0d evictions=%0d saturated_hits=%0d clock_wraps=%0d",
             n_hit, n_fill, n_evict, n_sat, n_wrap);
    checks++;
    if (n_hit == 0 || n_fill == 0 || n_evict == 0 || n_sat == 0 || n_wrap == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
