// tb_awrp_workloads: one 1000-reference data trace run through AWRP buffers
// of 30, 60, 90, 120, 150, 180 and 210 blocks (fully associative), the frame
// sizes of the policy's published evaluation. The trace is synthetic, since
// the original program trace is not available: 45 % of references go to 8
// hot blocks, 35 % to a working set of 180 blocks and 20 % to one-off scans.
// Every response is checked against the reference model; the hit ratio per
// size is printed and must not fall as the buffer grows by more than a few
// references' worth (replacement by weight is not a stack algorithm, so
// strict monotonicity is not guaranteed).
module tb_awrp_workloads;
  import awrp_ref_pkg::*;
  localparam int unsigned NSIZES = 7;
  localparam int unsigned NREF = 1000;
  localparam int unsigned SIZES [NSIZES] = '{30, 60, 90, 120, 150, 180, 210};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  longint trace [NREF];
  bit trace_ready = 1'b0;
  int checks = 0, failures = 0;
  int hits [NSIZES];
  bit done [NSIZES];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint scan_ptr;
    scan_ptr = 64'h10_0000;
    for (int t = 0; t < int'(NREF); t++) trace[t] = awrp_trace_addr(180, scan_ptr);
    trace_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  for (genvar g = 0; g < int'(NSIZES); g++) begin : g_size
    localparam int unsigned B = SIZES[g];
    localparam int unsigned WAY_W = $clog2(B);
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

    awrp_cache #(.BLOCKS(B)) dut (
      .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
      .resp_valid(resp_valid), .resp_hit(resp_hit), .resp_set(resp_set), .resp_way(resp_way),
      .resp_evict(resp_evict), .resp_evict_addr(resp_evict_addr), .access_count(access_count),
    .peek_set(peek_set), .peek_way(peek_way), .peek_valid(peek_valid), .peek_addr(peek_addr),
    .peek_f(peek_f), .peek_r(peek_r), .peek_w(peek_w));

    awrp_set_model model;

    initial begin
      hits[g] = 0;
      done[g] = 1'b0;
      model = new(B, awrp_pkg::FW_DEF, awrp_pkg::NW_DEF, awrp_pkg::FRAC_DEF);
      wait (rst_n);
      for (int t = 0; t < int'(NREF); t++) begin
        longint etag;
        bit ehit, eev;
        int eway;
        model.access(trace[t], longint'(t + 1), ehit, eway, eev, etag);
        @(negedge clk);
        req_valid = 1'b1;
        req_addr = 32'(trace[t]);
        do @(posedge clk); while (!req_ready);
        #1 req_valid = 1'b0;
        do @(negedge clk); while (!resp_valid);
        checks++;
        if (resp_hit !== ehit || resp_way !== WAY_W'(eway) || resp_evict !== eev ||
            (eev && resp_evict_addr !== 32'(etag))) begin
          failures++;
          $display("FAIL size %0d ref %0d: hit=%0b way=%0d expected %0b/%0d", B, t,
                   resp_hit, resp_way, ehit, eway);
        end
        if (ehit) hits[g]++;
      end
      done[g] = 1'b1;
    end
  end

  initial begin
    wait (trace_ready);
    for (int g = 0; g < int'(NSIZES); g++) wait (done[g]);
    for (int g = 0; g < int'(NSIZES); g++) begin
      $display("frame size %3d blocks: hits %4d of %0d, hit ratio %0d.%01d %%", SIZES[g], hits[g],
               NREF, hits[g] * 100 / NREF, (hits[g] * 1000 / NREF) % 10);
      if (g > 0) begin
        checks++;
        if (hits[g] + 10 < hits[g-1]) begin
          failures++; $display("FAIL hit count fell from %0d to %0d", hits[g-1], hits[g]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
