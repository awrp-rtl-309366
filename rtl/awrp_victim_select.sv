// awrp_victim_select: running-minimum search over the weights of a set.
//
// On a miss the controller presents the blocks of the set one per cycle
// (in_valid, in_way, in_w). This unit keeps the way with the smallest weight
// seen since the last start pulse. A candidate replaces the kept one only if
// its weight is strictly smaller, so ties go to the first candidate
// presented, which is the lowest way when the ways are presented in order.
//
// Interface: start clears the search; candidates follow in later cycles;
// min_found/min_way/min_w hold the result. Timing: registered; a candidate
// presented in cycle t is reflected in the outputs from cycle t+1.
// Follows the policy: the block with the lowest weight is replaced. Own
// choice: a sequential search with one comparator, and the tie rule.
module awrp_victim_select #(
  parameter int unsigned WAYS = awrp_pkg::BLOCKS_DEF,
  parameter int unsigned WW   = awrp_pkg::FW_DEF + awrp_pkg::FRAC_DEF,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  input  logic [WAY_W-1:0] in_way,
  input  logic [WW-1:0]    in_w,
  output logic             min_found,
  output logic [WAY_W-1:0] min_way,
  output logic [WW-1:0]    min_w
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min_found <= 1'b0;
      min_way   <= '0;
      min_w     <= '1;
    end else if (start) begin
      min_found <= 1'b0;
      min_way   <= '0;
      min_w     <= '1;
    end else if (in_valid && (!min_found || in_w < min_w)) begin
      min_found <= 1'b1;
      min_way   <= in_way;
      min_w     <= in_w;
    end
  end

endmodule
