// awrp_weight_unit: the AWRP weighting function W_i = F_i / (N - R_i).
//
// F_i counts the references to block i, R_i is the access clock value of its
// last reference and N the current access clock, so N - R_i is the block's
// age. A block referenced often and recently gets a large weight; the block
// with the smallest weight is the one to replace. The age is formed modulo
// 2^NW, matching the wrap-around of the access clock.
//
// The weight is an unsigned fixed-point number with FRAC fraction bits,
// W = floor(F * 2^FRAC / age). With FRAC >= NW every block with F >= 1 gets a
// weight of at least 1, so only a never-filled block (F = 0) weighs 0.
// The policy weighs only blocks with N != R_i; for age 0 w_valid is low and w
// is all ones.
//
// Interface: f, r, n in; w, w_valid out. Timing: combinational (one divider).
// Follows the policy: the formula and the N != R_i rule. Own choice: fixed
// point instead of floating point, the widths, and the truncating division.
module awrp_weight_unit #(
  parameter int unsigned NW   = awrp_pkg::NW_DEF,
  parameter int unsigned FW   = awrp_pkg::FW_DEF,
  parameter int unsigned FRAC = awrp_pkg::FRAC_DEF,
  localparam int unsigned WW  = FW + FRAC
) (
  input  logic [FW-1:0] f,
  input  logic [NW-1:0] r,
  input  logic [NW-1:0] n,
  output logic [WW-1:0] w,
  output logic          w_valid
);

  logic [NW-1:0] age;
  logic [WW-1:0] dividend;
  logic [WW-1:0] divisor;

  always_comb begin
    age      = n - r;
    w_valid  = (age != '0);
    dividend = {f, {FRAC{1'b0}}};
    divisor  = WW'(age);
    w        = w_valid ? dividend / divisor : '1;
  end

endmodule
