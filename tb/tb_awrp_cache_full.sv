// tb_awrp_cache_full: the AWRP buffer at its default size (210 blocks, one
// fully associative set, 32-bit block addresses) serving a 1000-reference
// data trace, the length of trace the policy was evaluated with. The trace
// is synthetic (hot blocks, a working set of 180 blocks and one-off scans).
// Every response and its latency is checked against the reference model,
// and every 10th reference also the F, R and W of all 210 blocks,
// and the run must show hits, cold fills and evictions.
module tb_awrp_cache_full;
  import awrp_ref_pkg::*;
  localparam int unsigned BLOCKS = awrp_pkg::BLOCKS_DEF;
  localparam int unsigned NREF = 1000;
  localparam int unsigned WAY_W = $clog2(BLOCKS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0;
  logic req_ready;
  logic [31:0] req_addr = '0;
  logic resp_valid, resp_hit, resp_evict;
  logic [0:0] resp_set;
  logic [WAY_W-1:0] resp_way;
  logic [31:0] resp_evict_addr;
  logic [15:0] access_count;
  logic [0:0] peek_set = '0;
  logic [WAY_W-1:0] peek_way = '0;
  logic peek_valid;
  logic [32-1:0] peek_addr;
  logic [16-1:0] peek_f;
  logic [16-1:0] peek_r;
  logic [32-1:0] peek_w;

  awrp_cache dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_hit(resp_hit), .resp_set(resp_set), .resp_way(resp_way),
    .resp_evict(resp_evict), .resp_evict_addr(resp_evict_addr), .access_count(access_count),
    .peek_set(peek_set), .peek_way(peek_way), .peek_valid(peek_valid), .peek_addr(peek_addr),
    .peek_f(peek_f), .peek_r(peek_r), .peek_w(peek_w));

  always #5 clk = ~clk;

  awrp_set_model model;
  int checks = 0, failures = 0;
  int n_hit = 0, n_fill = 0, n_evict = 0;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint scan_ptr;
    scan_ptr = 64'h10_0000;
    model = new(BLOCKS, awrp_pkg::FW_DEF, awrp_pkg::NW_DEF, awrp_pkg::FRAC_DEF);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 1; t <= int'(NREF); t++) begin
      longint a, etag;
      bit ehit, eev;
      int eway, lat;
      a = awrp_trace_addr(180, scan_ptr);
      model.access(a, longint'(t), ehit, eway, eev, etag);
      @(negedge clk);
      req_valid = 1'b1;
      req_addr = 32'(a);
      @(posedge clk);
      checks++;
      if (!req_ready) begin failures++; $display("FAIL not ready at reference %0d", t); end
      #1 req_valid = 1'b0;
      lat = 0;
      do begin @(negedge clk); lat++; end while (!resp_valid && lat < 1000);
      checks++;
      if (resp_hit !== ehit || resp_way !== WAY_W'(eway) || resp_evict !== eev ||
          (eev && resp_evict_addr !== 32'(etag)) || access_count !== 16'(t)) begin
        failures++;
        $display("FAIL ref %0d: hit=%0b way=%0d ev=%0b expected %0b/%0d/%0b", t,
                 resp_hit, resp_way, resp_evict, ehit, eway, eev);
      end
      checks++;
      if (lat != (ehit ? 2 : int'(BLOCKS) + 3)) begin
        failures++; $display("FAIL ref %0d latency %0d", t, lat);
      end
      if (ehit) n_hit++; else if (eev) n_evict++; else n_fill++;
      // Every 10th reference, the ranking state of all blocks.
      if (t % 10 == 0) begin
        for (int i = 0; i < int'(BLOCKS); i++) begin
          peek_way = WAY_W'(i);
          #1;
          checks++;
          if (peek_valid !== model.valid[i] || peek_f !== 16'(model.f[i]) ||
              peek_r !== 16'(model.r[i]) || peek_w !== 32'(model.w[i]) ||
              (peek_valid && peek_addr !== 32'(model.tag[i]))) begin
            failures++;
            $display("FAIL ref %0d block %0d: F=%0d R=%0d W=%0d expected %0d/%0d/%0d", t, i,
                     peek_f, peek_r, peek_w, model.f[i], model.r[i], model.w[i]);
          end
        end
      end
    end
    $display("references=%0d hits=%0d cold_fills=%0d evictions=%0d hit ratio %0d.%02d %%",
             NREF, n_hit, n_fill, n_evict, n_hit * 100 / NREF, (n_hit * 10000 / NREF) % 100);
    checks++;
    if (n_hit == 0 || n_fill == 0 || n_evict == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
