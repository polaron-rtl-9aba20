// parv_sign_exp: PARV-CE pipeline stage II, sign and exponent/regime
// processing, running beside the significand multiplier.
//
// Per lane: product sign = sign_a XOR sign_b, product exponent = exp_a +
// exp_b, and the product is flagged zero if either operand is zero. Over all
// non-zero lanes it finds the maximum product exponent with a tree of
// compare-and-select multiplexers, which stage III aligns against; all_zero
// is set when every lane is zero (the accumulator then skips the update).
// XOR signs and the max-exponent comparison follow the paper; the balanced
// compare tree is this design's choice. Combinational.
module parv_sign_exp
  import polaron_pkg::*;
(
  input  unpacked_t              a_u [LANES],
  input  unpacked_t              b_u [LANES],
  output logic                   p_sign [LANES],
  output logic                   p_zero [LANES],
  output logic signed [EXPW-1:0] p_exp  [LANES],
  output logic signed [EXPW-1:0] e_max,
  output logic                   all_zero
);
  // Tree node: valid flag + exponent
  logic                   tv [2*LANES-1];
  logic signed [EXPW-1:0] te [2*LANES-1];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      p_sign[l] = a_u[l].sign ^ b_u[l].sign;
      p_zero[l] = a_u[l].zero | b_u[l].zero;
      p_exp[l]  = a_u[l].exp + b_u[l].exp;
      tv[LANES-1+l] = !p_zero[l];
      te[LANES-1+l] = p_exp[l];
    end
    for (int n = LANES - 2; n >= 0; n--) begin
      logic take_r;
      take_r = tv[2*n+2] && (!tv[2*n+1] || (te[2*n+2] > te[2*n+1]));
      tv[n]  = tv[2*n+1] | tv[2*n+2];
      te[n]  = take_r ? te[2*n+2] : te[2*n+1];
    end
    all_zero = !tv[0];
    e_max    = tv[0] ? te[0] : '0;
  end
endmodule
