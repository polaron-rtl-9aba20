// parv_ce: PARV-CE, the Precision-Aware Runtime-adaptive Vector Compute
// Element. A five-stage pipelined SIMD dot-product MAC that shares one
// datapath between Var-FxP4/8/16, Var-FP8 (E4M3/E5M2), BF16, FP16
// (E5M10/E6M9), Posit8 and Posit16.
//
// Each valid cycle it multiplies the lanes of A and B element-wise and adds
// all lane products into its accumulator: 16 products per cycle for FxP4 and
// FP8, 4 for FxP8, Posit8 and BF16, 1 for the 16-bit formats.
//   Stage I   parv_input_proc  unpack A and B into sign/exponent/significand
//   Stage II  parv_sign_exp + simd_mul_array  XOR signs, add exponents,
//             find the maximum exponent, 16x4-bit Booth significand products
//   Stage III parv_align_csa   align to the max exponent, 2's complement,
//             4:2 CSA tree (16 -> 4 words)
//   Stage IV  parv_accum       4:2 CSA + carry-select adder + accumulator,
//             zero-skip of all-zero inputs
//   Stage V   parv_out_proc    LZC, normalise, RoundTowardPositive, pack
// Interface: in_valid qualifies one operand pair; in_first starts a new dot
// product, in_last marks its final pair. mode/variant/out_shift travel down
// the pipeline with the data, so the precision may change on any cycle.
// Timing: one pair per cycle; the result for a pair appears out_valid five
// clock edges after it is presented (out_last marks the finished dot product;
// out holds the running accumulation for the other items).
// Reset: synchronous, active high (the figure names the input rst).
// The stage split, mode codes, 128-bit A/B and 16-bit output follow the paper
// figure; what each stage does in detail is described in its own module.
module parv_ce
  import polaron_pkg::*;
(
  input  logic           clk,
  input  logic           rst,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  mode_e          mode,
  input  logic           variant,
  input  logic [4:0]     out_shift,
  input  logic [OPW-1:0] a,
  input  logic [OPW-1:0] b,
  output logic           out_valid,
  output logic           out_last,
  output logic [15:0]    out,
  output logic           out_ovf,
  output logic           out_zskip
);
  typedef struct packed {
    logic       valid;
    logic       first;
    logic       last;
    mode_e      mode;
    logic       variant;
    logic [4:0] out_shift;
  } ctl_t;

  // ---------------------------------------------------------------- stage I
  unpacked_t a_u [LANES], b_u [LANES];
  unpacked_t s1_a [LANES], s1_b [LANES];
  ctl_t      s1_c;
  parv_input_proc u_in (.mode(mode), .variant(variant), .a(a), .b(b), .a_u(a_u), .b_u(b_u));

  always_ff @(posedge clk) begin
    if (rst) s1_c <= '0;
    else     s1_c <= '{valid: in_valid, first: in_first, last: in_last, mode: mode,
                       variant: variant, out_shift: out_shift};
    s1_a <= a_u;
    s1_b <= b_u;
  end

  // --------------------------------------------------------------- stage II
  logic [SIGW-1:0]        a_sig [LANES], b_sig [LANES];
  logic [PRODW-1:0]       prod  [LANES];
  logic                   p_sign [LANES], p_zero [LANES];
  logic signed [EXPW-1:0] p_exp  [LANES];
  logic signed [EXPW-1:0] e_max;
  logic                   all_zero;
  always_comb
    for (int l = 0; l < LANES; l++) begin
      a_sig[l] = s1_a[l].sig;
      b_sig[l] = s1_b[l].sig;
    end
  simd_mul_array u_mul (.mulw(mode_mulw(s1_c.mode)), .a_sig(a_sig), .b_sig(b_sig), .prod(prod));
  parv_sign_exp  u_se  (.a_u(s1_a), .b_u(s1_b), .p_sign(p_sign), .p_zero(p_zero), .p_exp(p_exp),
                        .e_max(e_max), .all_zero(all_zero));

  ctl_t                   s2_c;
  logic [PRODW-1:0]       s2_mag  [LANES];
  logic                   s2_sign [LANES], s2_zero [LANES];
  logic signed [EXPW-1:0] s2_exp  [LANES];
  logic signed [EXPW-1:0] s2_emax;
  logic                   s2_allz;
  always_ff @(posedge clk) begin
    if (rst) s2_c <= '0;
    else     s2_c <= s1_c;
    s2_mag  <= prod;
    s2_sign <= p_sign;
    s2_zero <= p_zero;
    s2_exp  <= p_exp;
    s2_emax <= e_max;
    s2_allz <= all_zero;
  end

  // -------------------------------------------------------------- stage III
  logic [ALW-1:0] w [4];
  parv_align_csa u_al (.p_sign(s2_sign), .p_zero(s2_zero), .p_exp(s2_exp), .p_mag(s2_mag),
                       .e_max(s2_emax), .w(w));
  ctl_t                   s3_c;
  logic [ALW-1:0]         s3_w [4];
  logic signed [EXPW-1:0] s3_emax;
  logic                   s3_allz;
  always_ff @(posedge clk) begin
    if (rst) s3_c <= '0;
    else     s3_c <= s2_c;
    s3_w    <= w;
    s3_emax <= s2_emax;
    s3_allz <= s2_allz;
  end

  // --------------------------------------------------------------- stage IV
  logic signed [ACCW-1:0] acc_m;
  logic signed [EXPW-1:0] acc_e;
  logic                   acc_valid, acc_skip, acc_ovf;
  parv_accum u_acc (.clk(clk), .rst(rst), .in_valid(s3_c.valid), .in_first(s3_c.first),
                    .in_all_zero(s3_allz), .in_e(s3_emax), .in_w(s3_w),
                    .acc_m(acc_m), .acc_e(acc_e), .valid_o(acc_valid), .skip_o(acc_skip),
                    .acc_ovf(acc_ovf));
  ctl_t s4_c;
  always_ff @(posedge clk) begin
    if (rst) s4_c <= '0;
    else     s4_c <= s3_c;
  end

  // ---------------------------------------------------------------- stage V
  logic [15:0] o_code;
  logic        o_ovf;
  parv_out_proc u_out (.mode(s4_c.mode), .variant(s4_c.variant), .out_shift(s4_c.out_shift),
                       .acc_m(acc_m), .acc_e(acc_e), .out(o_code), .ovf(o_ovf));
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out       <= '0;
      out_ovf   <= 1'b0;
      out_zskip <= 1'b0;
    end else begin
      out_valid <= acc_valid;
      out_last  <= acc_valid && s4_c.last;
      out       <= o_code;
      out_ovf   <= acc_valid && (o_ovf || acc_ovf);
      out_zskip <= acc_skip;
    end
  end
endmodule
