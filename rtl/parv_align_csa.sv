// parv_align_csa: PARV-CE pipeline stage III, alignment and first
// accumulation stage.
//
// Each lane product magnitude is extended by GUARD zero bits, shifted right by
// (e_max - p_exp) so that all products share the weight 2^(e_max - GUARD) of
// the largest one, and turned into two's complement when its sign is set.
// Zero lanes contribute nothing. The sixteen aligned terms are reduced by a
// tree of 4:2 carry-save compressors (16 -> 8 -> 4 words). Bits shifted out
// below the guard window are truncated. Combinational.
// Alignment to the maximum exponent, conditional two's complement and the 4:2
// CSA follow the paper; the guard width and where the tree is cut between
// stages III and IV are this design's choices.
module parv_align_csa
  import polaron_pkg::*;
(
  input  logic                   p_sign [LANES],
  input  logic                   p_zero [LANES],
  input  logic signed [EXPW-1:0] p_exp  [LANES],
  input  logic [PRODW-1:0]       p_mag  [LANES],
  input  logic signed [EXPW-1:0] e_max,
  output logic [ALW-1:0]         w      [4]
);
  logic [ALW-1:0] t  [LANES];
  logic [ALW-1:0] l1 [8];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [ALW-1:0] m;
      int             d;
      d = int'(e_max) - int'(p_exp[l]);
      m = ALW'(p_mag[l]) << GUARD;
      if (p_zero[l] || d >= int'(PRODW + GUARD)) m = '0;
      else m = m >> d;
      t[l] = p_sign[l] ? (~m + ALW'(1)) : m;
    end
  end

  for (genvar g = 0; g < 4; g++) begin : g_l1
    csa42 #(.W(ALW)) u_c (.x0(t[4*g]), .x1(t[4*g+1]), .x2(t[4*g+2]), .x3(t[4*g+3]),
                          .sum(l1[2*g]), .carry(l1[2*g+1]));
  end
  for (genvar g = 0; g < 2; g++) begin : g_l2
    csa42 #(.W(ALW)) u_c (.x0(l1[4*g]), .x1(l1[4*g+1]), .x2(l1[4*g+2]), .x3(l1[4*g+3]),
                          .sum(w[2*g]), .carry(w[2*g+1]));
  end
endmodule
