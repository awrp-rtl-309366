// awrp_cache: a set-associative buffer whose replacement is decided by the
// adaptive weight ranking policy (AWRP).
//
// AWRP ranks the blocks in the buffer by a weight W = F / (N - R), where F
// counts the references to a block since it was loaded, R is the access clock
// at its last reference and N the current access clock. Frequently and
// recently used blocks weigh most; on a miss the lightest block of the set is
// replaced. The policy thus behaves between LRU and LFU while keeping only two
// counters and one weight per block, and it refreshes the weights only on a
// miss.
//
// This top keeps the global access clock N, splits each block address into a
// set index (its low log2(SETS) bits) and a tag (the whole address), and
// hands the reference to that set. The buffer holds block addresses only: it
// decides hit or miss and which block to displace; moving the data is left to
// the memory system around it, which sees the displaced address on the
// response.
//
// Interface: req_valid/req_ready/req_addr is a valid-ready handshake for one
// block reference. One reference is in flight at a time: req_ready is low
// from acceptance until the response. resp_valid pulses for one cycle with
// resp_hit, resp_set, resp_way, and on a miss that displaced a block
// resp_evict and resp_evict_addr. access_count is N. peek_set/peek_way
// select one block whose valid bit, address, F, R and last computed weight W
// appear combinationally on peek_*; this read port is this design's own
// addition for observing the ranking.
// Timing: for a reference accepted at clock edge e, resp_valid is set by edge
// e+1 on a hit and by edge e+WAYS+2 on a miss, WAYS = BLOCKS/SETS.
// req_ready returns at the edge that ends the response cycle, so the next
// reference is accepted one edge later at the earliest: a stream of hits
// runs at one reference every three cycles.
// Follows the policy: the weight formula, the hit and miss rules and the
// single access clock N for the whole buffer. Own choices: all widths, the
// set count (the policy's evaluation used a set-associative cache without
// giving the number of sets; the default 1 is fully associative), one
// reference in flight, and the handshake.
module awrp_cache
  import awrp_pkg::*;
#(
  parameter int unsigned BLOCKS = awrp_pkg::BLOCKS_DEF,
  parameter int unsigned SETS   = awrp_pkg::SETS_DEF,
  parameter int unsigned ADDR_W = awrp_pkg::ADDR_W_DEF,
  parameter int unsigned NW     = awrp_pkg::NW_DEF,
  parameter int unsigned FW     = awrp_pkg::FW_DEF,
  parameter int unsigned FRAC   = awrp_pkg::FRAC_DEF,
  localparam int unsigned WAYS  = BLOCKS / SETS,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // Reference from the processor side.
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  // Outcome of the reference.
  output logic              resp_valid,
  output logic              resp_hit,
  output logic [SET_W-1:0]  resp_set,
  output logic [WAY_W-1:0]  resp_way,
  output logic              resp_evict,
  output logic [ADDR_W-1:0] resp_evict_addr,
  // Global access clock N.
  output logic [NW-1:0]     access_count,
  // Read port onto the ranking state of one block.
  input  logic [SET_W-1:0]  peek_set,
  input  logic [WAY_W-1:0]  peek_way,
  output logic              peek_valid,
  output logic [ADDR_W-1:0] peek_addr,
  output logic [FW-1:0]     peek_f,
  output logic [NW-1:0]     peek_r,
  output logic [FW+FRAC-1:0] peek_w
);

  logic             accept;
  logic [SET_W-1:0] req_set;
  logic [SET_W-1:0] cur_set;
  logic             pending;

  logic [SETS-1:0]   set_busy;
  logic [SETS-1:0]   set_resp_valid;
  logic [SETS-1:0]   set_resp_hit;
  logic [WAY_W-1:0]  set_resp_way       [SETS];
  logic [SETS-1:0]   set_resp_evict;
  logic [ADDR_W-1:0] set_resp_evict_tag [SETS];
  logic [SETS-1:0]   set_peek_valid;
  logic [ADDR_W-1:0] set_peek_tag [SETS];
  logic [FW-1:0]     set_peek_f   [SETS];
  logic [NW-1:0]     set_peek_r   [SETS];
  logic [FW+FRAC-1:0] set_peek_w  [SETS];
  logic [SET_W-1:0]  peek_sel;

  assign req_set   = (SETS > 1) ? req_addr[SET_W-1:0] : '0;
  assign req_ready = !pending;
  assign accept    = req_valid && req_ready;

  awrp_access_clock #(.NW(NW)) u_clock (
    .clk   (clk),
    .rst_n (rst_n),
    .tick  (accept),
    .n     (access_count)
  );

  for (genvar s = 0; s < SETS; s++) begin : g_set
    awrp_set #(
      .WAYS (WAYS),
      .TAG_W(ADDR_W),
      .NW   (NW),
      .FW   (FW),
      .FRAC (FRAC)
    ) u_set (
      .clk            (clk),
      .rst_n          (rst_n),
      .n              (access_count),
      .req_valid      (accept && req_set == SET_W'(s)),
      .req_tag        (req_addr),
      .busy           (set_busy[s]),
      .resp_valid     (set_resp_valid[s]),
      .resp_hit       (set_resp_hit[s]),
      .resp_way       (set_resp_way[s]),
      .resp_evict     (set_resp_evict[s]),
      .resp_evict_tag (set_resp_evict_tag[s]),
      .peek_way       (peek_way),
      .peek_valid     (set_peek_valid[s]),
      .peek_tag       (set_peek_tag[s]),
      .peek_f         (set_peek_f[s]),
      .peek_r         (set_peek_r[s]),
      .peek_w         (set_peek_w[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0;
      cur_set <= '0;
    end else if (accept) begin
      pending <= 1'b1;
      cur_set <= req_set;
    end else if (resp_valid) begin
      pending <= 1'b0;
    end
  end

  always_comb begin
    resp_valid      = set_resp_valid[cur_set];
    resp_hit        = set_resp_hit[cur_set];
    resp_set        = cur_set;
    resp_way        = set_resp_way[cur_set];
    resp_evict      = set_resp_evict[cur_set];
    resp_evict_addr = set_resp_evict_tag[cur_set];
  end

  assign peek_sel   = (SETS > 1) ? peek_set : '0;
  assign peek_valid = set_peek_valid[peek_sel];
  assign peek_addr  = set_peek_tag[peek_sel];
  assign peek_f     = set_peek_f[peek_sel];
  assign peek_r     = set_peek_r[peek_sel];
  assign peek_w     = set_peek_w[peek_sel];

  // Only the set serving the pending reference may answer, and only once.
  a_resp_only_when_pending: assert property (@(posedge clk) disable iff (!rst_n)
    |set_resp_valid |-> pending && set_resp_valid == (SETS'(1) << cur_set));
  // While a reference is pending no set outside it is working.
  a_one_busy_set: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(set_busy));
  // The number of sets must divide the block count and be a power of two.
  initial begin
    assert (BLOCKS % SETS == 0 && (SETS & (SETS - 1)) == 0)
      else $error("awrp_cache: SETS must be a power of two dividing BLOCKS");
  end

endmodule
