// parv_input_proc: PARV-CE pipeline stage I, input processing.
//
// Splits the 128-bit operand words A and B into lanes for the selected mode
// and unpacks every element into sign, exponent and significand such that
// value = (-1)^sign * sig * 2^exp. Lane l takes bits [l*w +: w] where w is the
// element width of the mode (16 lanes of 4 or 8 bits, 4 lanes of 8 or 16 bits,
// or one 16-bit lane); lanes a mode does not use are flagged zero.
//   Var-FxP4/8/16 : two's complement integer -> sign + magnitude, exp = 0
//   Var-FP8       : variant 0 = E4M3 (bias 7), 1 = E5M2 (bias 15)
//   BF16          : E8M7 (bias 127)
//   FP16          : variant 0 = E5M10 (bias 15), 1 = E6M9 (bias 31)
//   Posit8/16     : es = 0 / 1, regime decoded by run-length count
// Subnormals are decoded; Inf/NaN codes are read as ordinary finite numbers
// and the posit NaR pattern is read as zero (this design's simplification).
// The field split (sign, exponent/regime, mantissa) follows the paper; lane
// placement and the special-value handling are this design's own choices.
// Combinational.
module parv_input_proc
  import polaron_pkg::*;
(
  input  mode_e           mode,
  input  logic            variant,
  input  logic [OPW-1:0]  a,
  input  logic [OPW-1:0]  b,
  output unpacked_t       a_u [LANES],
  output unpacked_t       b_u [LANES]
);
  function automatic unpacked_t dec_fxp(input logic [15:0] v, input int unsigned n);
    unpacked_t r;
    logic [15:0] sv, mag;
    sv = v << (16 - n);
    sv = $signed(sv) >>> (16 - n);       // sign-extend n-bit value
    r.sign = sv[15];
    mag    = sv[15] ? (~sv + 16'd1) : sv;
    r.sig  = mag;
    r.exp  = '0;
    r.zero = (sv == '0);
    return r;
  endfunction

  function automatic unpacked_t dec_fp(input logic [15:0] v, input int unsigned eb,
                                       input int unsigned mb, input int bias);
    unpacked_t r;
    int unsigned e, m;
    e = 32'(v >> mb) & ((32'd1 << eb) - 1);
    m = 32'(v) & ((32'd1 << mb) - 1);
    r.sign = v[eb + mb];
    if (e == 0) begin
      r.sig = SIGW'(m);
      r.exp = EXPW'(1 - bias - int'(mb));
    end else begin
      r.sig = SIGW'(m | (32'd1 << mb));
      r.exp = EXPW'(int'(e) - bias - int'(mb));
    end
    r.zero = (e == 0) && (m == 0);
    return r;
  endfunction

  function automatic unpacked_t dec_posit(input logic [15:0] v, input int unsigned n,
                                          input int unsigned es);
    unpacked_t r;
    logic [15:0] x, av;
    logic [14:0] bits, rest;
    logic        r0;
    int          run, k, e, fmax, scale;
    logic        done;
    x      = v & 16'((32'd1 << n) - 1);
    r.sign = x[n-1];
    av     = r.sign ? 16'((~x + 16'd1) & 16'((32'd1 << n) - 1)) : x;
    bits   = 15'(av << (16 - n));          // bits[14] = first regime bit
    r0     = bits[14];
    run    = 0;
    done   = 1'b0;
    for (int i = 14; i >= 0; i--) begin
      if (!done && (i >= 15 - int'(n - 1))) begin
        if (bits[i] == r0) run++;
        else done = 1'b1;
      end
    end
    k    = r0 ? run - 1 : -run;
    rest = (run + 1 >= 15) ? 15'd0 : (bits << (run + 1));
    e    = (es == 0) ? 0 : int'(32'(rest) >> (15 - es));
    rest = rest << es;
    fmax = int'(n) - 3 - int'(es);
    r.sig   = SIGW'((32'd1 << fmax) | (32'(rest) >> (15 - fmax)));
    scale   = k * (1 << es) + e;
    r.exp   = EXPW'(scale - fmax);
    r.zero  = ((x & 16'((32'd1 << (n - 1)) - 1)) == '0);          // zero, and NaR read as zero
    return r;
  endfunction

  function automatic unpacked_t dec(input logic [15:0] v);
    case (mode)
      MODE_FXP4:    return dec_fxp(v, 4);
      MODE_FXP8:    return dec_fxp(v, 8);
      MODE_FXP16:   return dec_fxp(v, 16);
      MODE_FP8:     return variant ? dec_fp(v, 5, 2, 15) : dec_fp(v, 4, 3, 7);
      MODE_BF16:    return dec_fp(v, 8, 7, 127);
      MODE_FP16:    return variant ? dec_fp(v, 6, 9, 31) : dec_fp(v, 5, 10, 15);
      MODE_POSIT8:  return dec_posit(v, 8, POSIT8_ES);
      default:      return dec_posit(v, 16, POSIT16_ES);
    endcase
  endfunction

  always_comb begin
    int unsigned nl, w;
    logic [15:0] ea, eb;
    nl = mode_lanes(mode);
    w  = mode_elem_bits(mode);
    for (int l = 0; l < LANES; l++) begin
      ea = 16'((a >> (l * w)) & ((OPW'(1) << w) - OPW'(1)));
      eb = 16'((b >> (l * w)) & ((OPW'(1) << w) - OPW'(1)));
      a_u[l] = dec(ea);
      b_u[l] = dec(eb);
      if (l >= nl) begin
        a_u[l].zero = 1'b1;
        b_u[l].zero = 1'b1;
      end
    end
  end
endmodule
