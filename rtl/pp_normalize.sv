// pp_normalize: first post-processing step. Brings the 16-bit PARV-CE result,
// whatever its format, into the common signed Q8.8 fixed-point format used by
// scale & shift and the activation unit.
//   Var-FxP modes : the CE result is already fixed point (its out_shift placed
//                   the binary point), taken as Q8.8 unchanged
//   FP8/FP16      : variant 0 E5M10, variant 1 E6M9
//   BF16          : E8M7
//   Posit8/16     : Posit16, es = 1
// Float and posit values are decoded to sign, scale and significand, shifted
// to 8 fractional bits (truncated toward zero) and saturated to int16; sat
// reports saturation. Combinational.
// The paper names a normalization step; converting every format to one
// fixed-point format is this design's reading of it.
module pp_normalize
  import polaron_pkg::*;
(
  input  mode_e              mode,
  input  logic               variant,
  input  logic [15:0]        code,
  output logic signed [15:0] q88,
  output logic               sat
);
  always_comb begin
    logic        s;
    int          eb, mb, bias, e, m, scale, sh;
    logic [31:0] sig;
    logic [63:0] mag;
    logic [15:0] av;
    int          i, run, k;
    logic        r0;
    i = 0; run = 0; k = 0; r0 = 1'b0; mag = '0;
    s = code[15]; sig = '0; scale = 0; eb = 5; mb = 10; bias = 15; e = 0; m = 0; sh = 0;
    av = '0;
    q88 = '0; sat = 1'b0;
    if (mode_is_fxp(mode)) begin
      q88 = code;
    end else begin
      if (mode == MODE_POSIT8 || mode == MODE_POSIT16) begin
        // posit16, es = 1
        av  = s ? (~code + 16'd1) : code;
        run = 0;
        r0  = av[14];
        i   = 14;
        for (int j = 14; j >= 0; j--)
          if (i == j && av[j] == r0) begin run++; i--; end
        k   = r0 ? run - 1 : -run;
        i   = i - 1;                               // terminating bit
        e   = (i >= 0) ? int'(av[i]) : 0;
        i   = i - 1;
        // fraction: remaining i+1 bits
        m   = (i >= 0) ? (int'(av) & ((1 << (i + 1)) - 1)) : 0;
        mb  = (i >= 0) ? i + 1 : 0;
        sig = 32'((1 << mb) | m);
        scale = 2 * k + e - mb;
        if ((code & 16'h7fff) == 0) sig = '0;      // zero and NaR
      end else begin
        if (mode == MODE_BF16)  begin eb = 8; mb = 7; bias = 127; end
        else if (variant)       begin eb = 6; mb = 9; bias = 31;  end
        e = (int'(code) >> mb) & ((1 << eb) - 1);
        m = int'(code) & ((1 << mb) - 1);
        sig   = (e == 0) ? 32'(m) : 32'(m | (1 << mb));
        scale = ((e == 0) ? 1 : e) - bias - mb;
      end
      // value = sig * 2^scale ; Q8.8 magnitude = sig * 2^(scale + 8)
      sh = scale + int'(PP_FRAC);
      if (sig == 0)       mag = '0;
      else if (sh >= 24)  mag = 64'hffff_ffff;
      else if (sh >= 0)   mag = 64'(sig) << sh;
      else if (sh > -40)  mag = 64'(sig) >> (-sh);
      else                mag = '0;
      if (!s && mag > 64'd32767)      begin q88 = 16'sh7fff; sat = 1'b1; end
      else if (s && mag > 64'd32768)  begin q88 = -16'sh8000; sat = 1'b1; end
      else                            q88 = s ? -16'(mag) : 16'(mag);
    end
  end
endmodule
