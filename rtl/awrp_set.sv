// awrp_set: one set of a buffer managed by the adaptive weight ranking
// policy (AWRP).
//
// Each of the WAYS blocks has a valid bit, its block address, a frequency
// index F (references since it was loaded), a recency index R (access clock
// value of its last reference) and a weight W. All are 0 after reset.
//
//   hit : F of the referenced block is incremented (saturating) and R takes
//         the current access clock N. No weight changes.
//   miss: every block is weighed, W = F / (N - R), one block per cycle, and
//         the weight is stored. An empty block weighs 0. The block with the
//         smallest weight (lowest way on a tie) is replaced by the referenced
//         block, which gets R = N, F = 1, W = 0.
//
// Weights are thus refreshed only on a miss, as the policy prescribes to keep
// its overhead low. A block with N == R is not weighed and cannot be chosen;
// only after 2^NW references without touching it can that happen.
//
// Interface: req_valid/req_tag start a reference and may only be raised while
// busy is low. n is the global access clock, already advanced for the
// reference being served. resp_valid pulses for one cycle with resp_hit,
// resp_way (the way hit or filled) and, on a miss that displaced a block,
// resp_evict and resp_evict_tag. peek_way selects a block whose valid bit,
// address, F, R and stored W appear combinationally on the peek_* outputs.
// Timing: for a request accepted at clock edge e, resp_valid is set by edge
// e+1 on a hit (one lookup cycle) and by edge e+WAYS+2 on a miss (lookup,
// WAYS weighing cycles, one fill cycle). busy is high from edge e until the
// edge that sets resp_valid.
// Follows the policy: the hit and miss rules, the weight formula, the reset
// values and the per-block storage of F, R and W. Own choices: the
// sequential weighing, fixed-point weights, saturating F, the tie rule, and
// letting empty blocks weigh 0 so that a cold set fills before it evicts.
module awrp_set
  import awrp_pkg::*;
#(
  parameter int unsigned WAYS  = awrp_pkg::BLOCKS_DEF,
  parameter int unsigned TAG_W = awrp_pkg::ADDR_W_DEF,
  parameter int unsigned NW    = awrp_pkg::NW_DEF,
  parameter int unsigned FW    = awrp_pkg::FW_DEF,
  parameter int unsigned FRAC  = awrp_pkg::FRAC_DEF,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned WW    = FW + FRAC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NW-1:0]    n,
  input  logic             req_valid,
  input  logic [TAG_W-1:0] req_tag,
  output logic             busy,
  output logic             resp_valid,
  output logic             resp_hit,
  output logic [WAY_W-1:0] resp_way,
  output logic             resp_evict,
  output logic [TAG_W-1:0] resp_evict_tag,
  // Read port onto the per-block state, for observation.
  input  logic [WAY_W-1:0] peek_way,
  output logic             peek_valid,
  output logic [TAG_W-1:0] peek_tag,
  output logic [FW-1:0]    peek_f,
  output logic [NW-1:0]    peek_r,
  output logic [WW-1:0]    peek_w
);

  // Per-block state.
  logic [TAG_W-1:0] tags  [WAYS];
  logic [WAYS-1:0]  valid;
  logic [FW-1:0]    freq  [WAYS];
  logic [NW-1:0]    rec   [WAYS];
  logic [WW-1:0]    wgt   [WAYS];

  set_state_e       state;
  logic [TAG_W-1:0] tag_q;
  logic [WAY_W-1:0] idx;

  // Lookup.
  logic             hit;
  logic [WAY_W-1:0] hit_way;

  awrp_tag_match #(.WAYS(WAYS), .TAG_W(TAG_W)) u_match (
    .tags       (tags),
    .valid      (valid),
    .lookup_tag (tag_q),
    .hit        (hit),
    .hit_way    (hit_way)
  );

  // Weighing of the block selected by idx.
  logic [WW-1:0] w_calc;
  logic          w_calc_valid;
  logic          cand_valid;
  logic [WW-1:0] cand_w;

  awrp_weight_unit #(.NW(NW), .FW(FW), .FRAC(FRAC)) u_weight (
    .f       (freq[idx]),
    .r       (rec[idx]),
    .n       (n),
    .w       (w_calc),
    .w_valid (w_calc_valid)
  );

  always_comb begin
    if (!valid[idx]) begin
      cand_valid = 1'b1;
      cand_w     = '0;
    end else begin
      cand_valid = w_calc_valid;
      cand_w     = w_calc;
    end
  end

  // Victim search.
  logic             vs_start;
  logic             min_found;
  logic [WAY_W-1:0] min_way;
  logic [WW-1:0]    min_w;
  logic [WAY_W-1:0] victim;

  assign vs_start = (state == ST_LOOKUP);

  awrp_victim_select #(.WAYS(WAYS), .WW(WW)) u_victim (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (vs_start),
    .in_valid  (state == ST_SCAN && cand_valid),
    .in_way    (idx),
    .in_w      (cand_w),
    .min_found (min_found),
    .min_way   (min_way),
    .min_w     (min_w)
  );

  assign peek_valid = valid[peek_way];
  assign peek_tag   = tags[peek_way];
  assign peek_f     = freq[peek_way];
  assign peek_r     = rec[peek_way];
  assign peek_w     = wgt[peek_way];

  assign victim = min_found ? min_way : '0;
  assign busy   = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= ST_IDLE;
      tag_q          <= '0;
      idx            <= '0;
      valid          <= '0;
      resp_valid     <= 1'b0;
      resp_hit       <= 1'b0;
      resp_way       <= '0;
      resp_evict     <= 1'b0;
      resp_evict_tag <= '0;
      for (int i = 0; i < WAYS; i++) begin
        tags[i] <= '0;
        freq[i] <= '0;
        rec[i]  <= '0;
        wgt[i]  <= '0;
      end
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        ST_IDLE: begin
          if (req_valid) begin
            tag_q <= req_tag;
            state <= ST_LOOKUP;
          end
        end
        ST_LOOKUP: begin
          if (hit) begin
            if (freq[hit_way] != '1) freq[hit_way] <= freq[hit_way] + 1'b1;
            rec[hit_way]   <= n;
            resp_valid     <= 1'b1;
            resp_hit       <= 1'b1;
            resp_way       <= hit_way;
            resp_evict     <= 1'b0;
            resp_evict_tag <= '0;
            state          <= ST_IDLE;
          end else begin
            idx   <= '0;
            state <= ST_SCAN;
          end
        end
        ST_SCAN: begin
          if (cand_valid) wgt[idx] <= cand_w;
          if (idx == WAY_W'(WAYS - 1)) state <= ST_FILL;
          else                         idx   <= idx + 1'b1;
        end
        ST_FILL: begin
          tags[victim]   <= tag_q;
          valid[victim]  <= 1'b1;
          freq[victim]   <= FW'(1);
          rec[victim]    <= n;
          wgt[victim]    <= '0;
          resp_valid     <= 1'b1;
          resp_hit       <= 1'b0;
          resp_way       <= victim;
          resp_evict     <= valid[victim];
          resp_evict_tag <= tags[victim];
          state          <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A reference may only start while the set is idle.
  a_req_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> !busy);

endmodule
