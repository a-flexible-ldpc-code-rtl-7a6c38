// compare_unit: COMPARE, 1/alpha scaling and final adder of the PE.
//
// For one element j of a check it forms the new check-to-bit message
//   R_mj(new) = s_mj * A / alpha,  A = min2 if |L(q_mj)| == min1, else min1,
// where s_mj is the product of the signs of the other elements (the sign XOR
// of the whole check XOR the element's own sign), and then the updated bit
// value L(q_j)(new) = L(q_mj) + R_mj(new), saturated to QW bits.
// 1/alpha (alpha = 1.15) is a constant multiplication by ALPHA_INV/128 with
// truncation of the magnitude. The unit is combinational.
//
// The paper's formula carries a leading minus (-s_mj * A/alpha), inherited
// from the Psi-function form of the update; with min-sum magnitudes that sign
// would make every check push its bits away from agreement, so this design
// uses the usual min-sum sign s_mj * A/alpha. The Q0.7 constant 111/128 is
// this design's approximation of 1/1.15.
module compare_unit
  import ldpc_pkg::*;
#(
  parameter int unsigned ALPHA_INV = ALPHA_INV_Q7
) (
  input  logic signed [QW-1:0] lq_mj,
  input  logic [QW-2:0]        min1,
  input  logic [QW-2:0]        min2,
  input  logic                 sign_all,
  output logic signed [QW-1:0] r_new,
  output logic signed [QW-1:0] lq_new
);
  logic [QW-2:0]  mag, a;
  logic [QW+6:0]  prod;
  logic [QW-2:0]  scaled;
  logic           s;

  always_comb begin
    mag    = (QW-1)'(lq_mj[QW-1] ? -lq_mj : lq_mj);
    a      = (mag != min1) ? min1 : min2;                 // COMPARE
    prod   = (QW+7)'(a) * (QW+7)'(ALPHA_INV);             // x 1/alpha
    scaled = (QW-1)'(prod >> 7);
    s      = sign_all ^ lq_mj[QW-1];
    r_new  = s ? -$signed({1'b0, scaled}) : $signed({1'b0, scaled});
    lq_new = sat((QW+2)'(lq_mj) + (QW+2)'(r_new));
  end
endmodule
