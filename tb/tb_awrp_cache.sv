// tb_awrp_cache: end-to-end test of the AWRP buffer at reduced size
// (16 blocks in 2 sets of 8, 3-bit frequency counters, 10-bit access clock).
//
// A driver issues a skewed stream of block references through the
// valid/ready port, sometimes holding a request while the buffer is busy.
// A monitor compares every response (hit, set, way, displaced address) and
// its latency with one reference model per set, and the access count with
// the number of accepted references, and at each response the ranking state
// (valid, address, F, R, W) of one randomly chosen block. The run must exercise hits, cold fills,
// evictions, a saturated frequency counter, a wrap of the access clock, both
// sets and back-pressure; a mechanism never seen counts as a failure.
module tb_awrp_cache;
  import awrp_ref_pkg::*;
  localparam int unsigned BLOCKS = 16, SETS = 2, ADDR_W = 20, NW = 10, FW = 3, FRAC = 16;
  localparam int unsigned WAYS = BLOCKS / SETS, WAY_W = $clog2(WAYS), SET_W = 1;
  localparam int unsigned NREF = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0;
  logic req_ready;
  logic [ADDR_W-1:0] req_addr = '0;
  logic resp_valid, resp_hit, resp_evict;
  logic [SET_W-1:0] resp_set;
  logic [WAY_W-1:0] resp_way;
  logic [ADDR_W-1:0] resp_evict_addr;
  logic [NW-1:0] access_count;
  logic [SET_W-1:0] peek_set = '0;
  logic [WAY_W-1:0] peek_way = '0;
  logic peek_valid;
  logic [ADDR_W-1:0] peek_addr;
  logic [FW-1:0] peek_f;
  logic [NW-1:0] peek_r;
  logic [FW+FRAC-1:0] peek_w;

  awrp_cache #(.BLOCKS(BLOCKS), .SETS(SETS), .ADDR_W(ADDR_W), .NW(NW), .FW(FW), .FRAC(FRAC)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_hit(resp_hit), .resp_set(resp_set), .resp_way(resp_way),
    .resp_evict(resp_evict), .resp_evict_addr(resp_evict_addr), .access_count(access_count),
    .peek_set(peek_set), .peek_way(peek_way), .peek_valid(peek_valid), .peek_addr(peek_addr),
    .peek_f(peek_f), .peek_r(peek_r), .peek_w(peek_w));

  always #5 clk = ~clk;

  typedef struct {
    bit     hit;
    int     set;
    int     way;
    bit     evict;
    longint etag;
    int     accept_cycle;
  } exp_t;

  awrp_set_model model [SETS];
  exp_t expq [$];
  int checks = 0, failures = 0;
  int cycle = 0;
  int n_hit = 0, n_fill = 0, n_evict = 0, n_sat = 0, n_wrap = 0, n_stall = 0, n_resp = 0;
  int n_set [SETS];
  longint nn = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Look at a different block every cycle.
  always @(negedge clk) begin
    peek_set <= SET_W'($urandom_range(SETS - 1));
    peek_way <= WAY_W'($urandom_range(WAYS - 1));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model update at every accepted reference.
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      exp_t e;
      int s;
      s = int'(req_addr[SET_W-1:0]);
      nn = (nn + 1) % (1 << NW);
      if (nn == 0) n_wrap++;
      model[s].access(longint'(req_addr), nn, e.hit, e.way, e.evict, e.etag);
      e.set = s;
      e.accept_cycle = cycle;
      if (e.hit && model[s].f[e.way] == 7) n_sat++;
      n_set[s]++;
      expq.push_back(e);
    end
    if (rst_n && req_valid && !req_ready) n_stall++;
  end

  // Response monitor.
  always @(posedge clk) begin
    if (rst_n && resp_valid) begin
      exp_t e;
      int lat;
      n_resp++;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL response with nothing pending");
      end else begin
        e = expq.pop_front();
        lat = cycle - e.accept_cycle;
        if (resp_hit !== e.hit || resp_set !== SET_W'(e.set) || resp_way !== WAY_W'(e.way) ||
            resp_evict !== e.evict || (e.evict && resp_evict_addr !== ADDR_W'(e.etag))) begin
          failures++;
          $display("FAIL resp %0d: hit=%0b set=%0d way=%0d ev=%0b ea=%0h expected %0b/%0d/%0d/%0b/%0h",
                   n_resp, resp_hit, resp_set, resp_way, resp_evict, resp_evict_addr,
                   e.hit, e.set, e.way, e.evict, e.etag);
        end
        checks++;
        if (lat != (e.hit ? 2 : int'(WAYS) + 3)) begin
          failures++; $display("FAIL resp %0d latency %0d", n_resp, lat);
        end
        if (e.hit) n_hit++; else if (e.evict) n_evict++; else n_fill++;
      end
      // One randomly chosen block's ranking state against the model.
      begin
        int ps, pw;
        ps = int'(peek_set);
        pw = int'(peek_way);
        checks++;
        if (peek_valid !== model[ps].valid[pw] || peek_f !== FW'(model[ps].f[pw]) ||
            peek_r !== NW'(model[ps].r[pw]) || peek_w !== (FW+FRAC)'(model[ps].w[pw]) ||
            (peek_valid && peek_addr !== ADDR_W'(model[ps].tag[pw]))) begin
          failures++;
          $display("FAIL resp %0d set %0d way %0d: v=%0b F=%0d R=%0d W=%0d expected %0b/%0d/%0d/%0d",
                   n_resp, ps, pw, peek_valid, peek_f, peek_r, peek_w, model[ps].valid[pw],
                   model[ps].f[pw], model[ps].r[pw], model[ps].w[pw]);
        end
      end
      checks++;
      if (access_count !== NW'(nn)) begin
        failures++; $display("FAIL access_count %0d expected %0d", access_count, nn);
      end
    end
  end

  initial begin
    longint scan_ptr;
    scan_ptr = 64'h8000;
    for (int s = 0; s < int'(SETS); s++) begin
      model[s] = new(WAYS, FW, NW, FRAC);
      n_set[s] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < int'(NREF); t++) begin
      @(negedge clk);
      req_valid = 1'b1;
      req_addr  = ADDR_W'(awrp_trace_addr(12, scan_ptr));
      do @(posedge clk); while (!req_ready);
      #1 req_valid = 1'b0;
      // Either issue the next reference at once (it waits for req_ready)
      // or leave the port idle for a few cycles.
      if ($urandom_range(1) == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
    wait (expq.size() == 0);
    repeat (3) @(posedge clk);
    $display("responses=%0d hits=%0d cold_fills=%0d evictions=%0d saturated_hits=%0d clock_wraps=%0d stalls=%0d set0=%0d set1=%0d",
             n_resp, n_hit, n_fill, n_evict, n_sat, n_wrap, n_stall, n_set[0], n_set[1]);
    $display("hit ratio %0d.%02d %%", n_hit * 100 / n_resp, (n_hit * 10000 / n_resp) % 100);
    checks++;
    if (n_resp != int'(NREF)) begin failures++; $display("FAIL %0d responses", n_resp); end
    checks++;
    if (n_hit == 0 || n_fill == 0 || n_evict == 0 || n_sat == 0 || n_wrap == 0 || n_stall == 0 ||
        n_set[0] == 0 || n_set[1] == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
