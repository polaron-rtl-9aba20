// parv_out_proc: PARV-CE pipeline stage V, output inter-format restructuring.
//
// Turns the accumulator (acc_m * 2^(acc_e - GUARD)) into one 16-bit result:
//   Var-FxP4/8/16 : acc >>> (GUARD + out_shift), rounded toward +inf and
//                   saturated to int16 (out_shift places the binary point)
//   Var-FP8, FP16 : variant 0 -> E5M10 (IEEE half), variant 1 -> E6M9
//   BF16          : BF16
//   Posit8/16     : Posit16 with es = 1
// A leading-zero count gives the position of the leading one, which fixes the
// exponent; the significand is cut to the output width and the dropped bits
// form a sticky bit. Rounding is RoundTowardPositive (positive values with a
// non-zero sticky are incremented, negative values are truncated). Subnormal
// float results are produced; float overflow gives +Inf (positive) or the
// largest finite negative number, as RoundTowardPositive requires. Posit
// results saturate at maxpos; tiny positive values round up to minpos and
// tiny negative values up to zero.
// ovf is set on any saturation or overflow. Combinational.
// LZC/normalisation/rounding mode follow the paper; the output format chosen
// for each input mode is this design's choice (the paper gives only a 16-bit
// output).
module parv_out_proc
  import polaron_pkg::*;
(
  input  mode_e                  mode,
  input  logic                   variant,
  input  logic [4:0]             out_shift,
  input  logic signed [ACCW-1:0] acc_m,
  input  logic signed [EXPW-1:0] acc_e,
  output logic [15:0]            out,
  output logic                   ovf
);
  logic [ACCW-1:0] mag;
  logic            sgn;
  assign sgn = acc_m[ACCW-1];
  assign mag = sgn ? ACCW'(-acc_m) : ACCW'(acc_m);
  int              lz_pos;   // index of the leading one

  // Leading-one position (priority encoder).
  always_comb begin
    lz_pos = 0;
    for (int i = 0; i < int'(ACCW); i++)
      if (mag[i]) lz_pos = i;
  end

  function automatic logic [16:0] enc_fp(input logic s, input logic [ACCW-1:0] m,
                                         input int p, input int ae,
                                         input int eb, input int mb, input int bias);
    // returns {ovf, 16-bit code}
    int          e_lead, biased, lsbw, r;
    logic [ACCW-1:0] q;
    logic        sticky;
    logic [15:0] packed_v, emax_field;
    logic        of;
    e_lead = p + ae - int'(GUARD);
    biased = e_lead + bias;
    lsbw   = (biased >= 1) ? (e_lead - mb) : (1 - bias - mb);
    r      = lsbw - (ae - int'(GUARD));
    if (r >= int'(ACCW)) begin
      q = '0; sticky = (m != '0);
    end else if (r > 0) begin
      q = m >> r; sticky = ((m & ((ACCW'(1) << r) - ACCW'(1))) != '0);
    end else begin
      q = m << (-r); sticky = 1'b0;
    end
    if (biased >= 1) packed_v = 16'(((biased - 1) << mb)) + 16'(q);
    else             packed_v = 16'(q);
    if (!s && sticky) packed_v = packed_v + 16'd1;
    emax_field = 16'(((1 << eb) - 1) << mb);
    of = (biased >= (1 << eb) - 1) || (packed_v >= emax_field);
    if (of) packed_v = s ? (emax_field - 16'd1) : emax_field;
    return {of, s, packed_v[14:0]};
  endfunction

  function automatic logic [16:0] enc_posit16(input logic s, input logic [ACCW-1:0] m,
                                              input int p, input int ae);
    int            sc, k, ebit, rlen;
    logic [ACCW-1:0] fr;
    logic [79:0]   full;
    logic [15:0]   regpat;
    logic [14:0]   body;
    logic          sticky, of;
    logic [15:0]   res;
    sc   = p + ae - int'(GUARD);
    k    = sc >>> 1;
    ebit = sc & 1;
    of   = 1'b0;
    if (k >= 14) begin
      body = 15'h7fff; sticky = 1'b0; of = (sc > 28) || (m != (ACCW'(1) << p));
    end else if (k < -14) begin
      body = s ? 15'h0000 : 15'h0001; sticky = 1'b0;
    end else begin
      fr = m << (int'(ACCW) - 1 - p);            // leading one at the top
      if (k >= 0) begin
        rlen   = k + 2;
        regpat = 16'(((1 << (k + 1)) - 1) << 1);
      end else begin
        rlen   = -k + 1;
        regpat = 16'd1;
      end
      full   = (80'(regpat) << (80 - rlen)) |
               ({1'(ebit), fr[ACCW-2:0], 16'd0} >> rlen);
      body   = full[79:65];
      sticky = (full[64:0] != '0);
      if (!s && sticky && body != 15'h7fff) body = body + 15'd1;
      if (body == '0 && !s) body = 15'h0001;
    end
    res = s ? (~{1'b0, body} + 16'd1) : {1'b0, body};
    return {of, res};
  endfunction

  always_comb begin
    logic [16:0] r;
    logic signed [ACCW-1:0] fl, rr;
    logic        st;
    int          sh;
    r   = '0;
    if (mode_is_fxp(mode)) begin
      sh = int'(GUARD) + int'(out_shift);
      fl = acc_m >>> sh;
      st = ((acc_m & ((ACCW'(1) << sh) - ACCW'(1))) != '0);
      rr = fl + (st ? ACCW'(1) : ACCW'(0));
      if (rr > 32767)       r = {1'b1, 16'h7fff};
      else if (rr < -32768) r = {1'b1, 16'h8000};
      else                  r = {1'b0, rr[15:0]};
    end else if (mag == '0) begin
      r = '0;
    end else begin
      case (mode)
        MODE_BF16:            r = enc_fp(sgn, mag, lz_pos, int'(acc_e), 8, 7, 127);
        MODE_FP8, MODE_FP16:  r = variant ? enc_fp(sgn, mag, lz_pos, int'(acc_e), 6, 9, 31)
                                          : enc_fp(sgn, mag, lz_pos, int'(acc_e), 5, 10, 15);
        default:              r = enc_posit16(sgn, mag, lz_pos, int'(acc_e));
      endcase
    end
    ovf = r[16];
    out = r[15:0];
  end
endmodule
