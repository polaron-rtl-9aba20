// tb_fmt_pkg: reference number-format decoders for the testbenches, written
// with real arithmetic and independent of the RTL unpacking logic.
// The formats decoded are the ones this design uses for each precision mode
// (see polaron_pkg); they are not specified in detail by the published
// description.
package tb_fmt_pkg;
function automatic real r_pow2(input int e);
  real r;
  r = 1.0;
  if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
  else        for (int i = 0; i < -e; i++) r = r / 2.0;
  return r;
endfunction

// two's complement integer of n bits
function automatic real r_fxp(input logic [15:0] v, input int n);
  longint x;
  x = longint'(v) & ((64'd1 << n) - 1);
  if (x >= (64'd1 << (n - 1))) x = x - (64'sd1 <<< n);
  return real'(x);
endfunction

// IEEE-like binary float, every exponent code finite, subnormals included
function automatic real r_fp(input logic [15:0] v, input int eb, input int mb, input int bias);
  int e, m;
  real r;
  e = (int'(v) >> mb) & ((1 << eb) - 1);
  m = int'(v) & ((1 << mb) - 1);
  if (e == 0) r = real'(m) * r_pow2(1 - bias - mb);
  else        r = (1.0 + real'(m) * r_pow2(-mb)) * r_pow2(e - bias);
  return v[eb + mb] ? -r : r;
endfunction

// posit of n bits with es exponent bits (NaR read as 0)
function automatic real r_posit(input logic [15:0] v, input int n, input int es);
  int x, i, k, e, fb, scale;
  real f;
  bit s, r0;
  x = int'(v) & ((1 << n) - 1);
  if ((x & ((1 << (n - 1)) - 1)) == 0) return 0.0;
  s = x[n-1];
  if (s) x = ((1 << n) - x) & ((1 << n) - 1);
  i  = n - 2;
  r0 = x[i];
  k  = 0;
  while (i >= 0 && x[i] == r0) begin k++; i--; end
  k = r0 ? k - 1 : -k;
  i--;                                       // terminating bit
  e = 0;
  for (int j = 0; j < es; j++) begin
    e = e << 1;
    if (i >= 0) begin e = e | x[i]; i--; end
  end
  f = 1.0; fb = 0;
  while (i >= 0) begin fb++; if (x[i]) f = f + r_pow2(-fb); i--; end
  scale = k * (1 << es) + e;
  return s ? -f * r_pow2(scale) : f * r_pow2(scale);
endfunction

function automatic real r_abs(input real x);
  return (x < 0.0) ? -x : x;
endfunction
endpackage
