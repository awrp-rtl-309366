// awrp_access_clock: the global access clock N of the AWRP policy.
//
// N counts the references made to the buffer. Each reference advances it by
// one in the cycle it is accepted, so while that reference is being served N
// holds its sequence number (1 for the first reference after reset). The
// recency index R_i of a block is a copy of N taken when the block was last
// referenced, and N - R_i is the block's age in references.
//
// Interface: tick (one accepted reference) in, n out, registered.
// Timing: n changes on the clock edge at which tick is high.
// Follows the policy: N and the recency stamps taken from it. Own choices:
// the 16-bit default width, wrap-around modulo 2^NW (ages are formed modulo
// 2^NW as well, so they stay right for any block younger than 2^NW
// references) and the reset value 0.
module awrp_access_clock #(
  parameter int unsigned NW = awrp_pkg::NW_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,
  output logic [NW-1:0] n
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    n <= '0;
    else if (tick) n <= n + 1'b1;
  end

endmodule
