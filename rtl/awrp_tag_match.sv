// awrp_tag_match: hit detection for one set of the AWRP buffer.
//
// Compares the looked-up block address with the stored address of every way
// in parallel. A hit needs a valid way with an equal address; hit_way is the
// lowest such way (only one can match while the controller keeps addresses
// unique within a set).
//
// Interface: tags/valid of all ways and lookup_tag in; hit and hit_way out.
// Timing: purely combinational.
// Follows the policy: a hit is a reference to a block already in the buffer.
// Own choice: a fully parallel compare and storage of the whole block address.
module awrp_tag_match #(
  parameter int unsigned WAYS  = awrp_pkg::BLOCKS_DEF,
  parameter int unsigned TAG_W = awrp_pkg::ADDR_W_DEF,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [TAG_W-1:0] tags [WAYS],
  input  logic [WAYS-1:0]  valid,
  input  logic [TAG_W-1:0] lookup_tag,
  output logic             hit,
  output logic [WAY_W-1:0] hit_way
);

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    // Walk from the top way down so the lowest matching way wins.
    for (int i = WAYS - 1; i >= 0; i--) begin
      if (valid[i] && tags[i] == lookup_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(i);
      end
    end
  end

endmodule
