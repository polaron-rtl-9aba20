// tb_parv_ce: self-checking testbench of the PARV-CE multi-precision MAC.
//
// Streams random operand pairs in all eight modes back to back (so the mode
// changes while the pipeline is full), single-pair and multi-pair dot
// products, and compares each finished result against a real-arithmetic
// reference: exact for the fixed-point modes (ceil of sum / 2^out_shift,
// saturated), within a rounding/alignment tolerance for float and posit
// modes. Also checks the 5-cycle latency, one-pair-per-cycle throughput,
// saturation (out_ovf) and zero-skip (out_zskip).
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_ce;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic           in_valid = 0, in_first = 0, in_last = 0, variant = 0;
  mode_e          mode = MODE_FXP4;
  logic [4:0]     out_shift = 0;
  logic [OPW-1:0] a = '0, b = '0;
  logic           out_valid, out_last, out_ovf, out_zskip;
  logic [15:0]    out;

  parv_ce dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct {
    mode_e  m; logic v; logic [4:0] oshift;
    real    ref_v; real tol; longint ref_i; bit ovf_exp; bit chk_ovf;
  } exp_t;
  exp_t q[$];

  // ------------------------------------------------------- element values
  function automatic real elem(mode_e m, logic v, logic [15:0] x);
    case (m)
      MODE_FXP4:    return r_fxp(x, 4);
      MODE_FXP8:    return r_fxp(x, 8);
      MODE_FXP16:   return r_fxp(x, 16);
      MODE_FP8:     return v ? r_fp(x, 5, 2, 15) : r_fp(x, 4, 3, 7);
      MODE_BF16:    return r_fp(x, 8, 7, 127);
      MODE_FP16:    return v ? r_fp(x, 6, 9, 31) : r_fp(x, 5, 10, 15);
      MODE_POSIT8:  return r_posit(x, 8, 0);
      default:      return r_posit(x, 16, 1);
    endcase
  endfunction

  function automatic real out_val(mode_e m, logic v, logic [15:0] x);
    case (m)
      MODE_BF16:           return r_fp(x, 8, 7, 127);
      MODE_FP8, MODE_FP16: return v ? r_fp(x, 6, 9, 31) : r_fp(x, 5, 10, 15);
      default:             return r_posit(x, 16, 1);
    endcase
  endfunction

  function automatic int nlanes(mode_e m);
    case (m)
      MODE_FXP4, MODE_FP8: return 16;
      MODE_FXP8, MODE_POSIT8, MODE_BF16: return 4;
      default: return 1;
    endcase
  endfunction
  function automatic int ebits(mode_e m);
    case (m)
      MODE_FXP4: return 4;
      MODE_FP8, MODE_FXP8, MODE_POSIT8: return 8;
      default: return 16;
    endcase
  endfunction

  // random element whose magnitude stays inside a comfortable range
  function automatic logic [15:0] rnd_elem(mode_e m, logic v);
    logic [15:0] x;
    real r;
    forever begin
      x = 16'($urandom);
      if (ebits(m) == 4) x[15:4] = '0;
      if (ebits(m) == 8) x[15:8] = '0;
      case (m)
        MODE_FP16:  if (!v) x[14:10] = 5'(10 + $urandom_range(0, 10));
                    else    x[14:9]  = 6'(24 + $urandom_range(0, 14));
        MODE_BF16:  x[14:7] = 8'(110 + $urandom_range(0, 30));
        MODE_FP8:   if (!v) x[6:3] = 4'($urandom_range(0, 11));
                    else    x[6:2] = 5'($urandom_range(0, 22));
        default: ;
      endcase
      r = r_abs(elem(m, v, x));
      if (m == MODE_POSIT16 && r != 0.0 && (r > 4096.0 || r < 1.0/4096.0)) continue;
      return x;
    end
  endfunction

  // float output unit in the last place near |x|
  function automatic real ulp(mode_e m, logic v, real x);
    int e, mb, emin;
    real ax;
    ax = r_abs(x);
    case (m)
      MODE_BF16:           begin mb = 7;  emin = -126; end
      MODE_FP8, MODE_FP16: begin mb = v ? 9 : 10; emin = v ? -30 : -14; end
      default:             begin mb = 12; emin = -60; end
    endcase
    e = emin;
    while (e < 200 && r_pow2(e + 1) <= ax) e++;
    if (m == MODE_POSIT8 || m == MODE_POSIT16) begin
      // posit16, es=1: fraction bits = 16 - 1 - regime length - 1
      int k, rl;
      k  = (e >= 0) ? e / 2 : -((-e + 1) / 2);
      rl = (k >= 0) ? k + 2 : -k + 1;
      mb = 14 - rl;
      if (mb < 0) mb = 0;
    end
    return r_pow2(e - mb);
  endfunction

  // -------------------------------------------------------- send one pair
  real    acc_r; longint acc_i; real acc_abs;
  task automatic send(mode_e m, logic v, logic [4:0] oshift, bit first, bit last,
                      bit zero_vec = 0, bit chk_ovf = 0, bit ovf_exp = 0);
    logic [OPW-1:0] va, vb;
    real s, sa;
    longint si;
    va = '0; vb = '0; s = 0.0; sa = 0.0; si = 0;
    if (!zero_vec)
      for (int l = 0; l < nlanes(m); l++) begin
        logic [15:0] xa, xb;
        xa = rnd_elem(m, v); xb = rnd_elem(m, v);
        va[l*ebits(m) +: 16] = xa; vb[l*ebits(m) +: 16] = xb;
        s  += elem(m, v, xa) * elem(m, v, xb);
        sa += r_abs(elem(m, v, xa) * elem(m, v, xb));
        if (m == MODE_FXP4 || m == MODE_FXP8 || m == MODE_FXP16)
          si += longint'(elem(m, v, xa)) * longint'(elem(m, v, xb));
      end
    va = va & ((OPW'(1) << (nlanes(m) * ebits(m))) - 1) | (va & '0);
    vb = vb & ((OPW'(1) << (nlanes(m) * ebits(m))) - 1);
    if (nlanes(m) * ebits(m) == 128) begin end
    if (first) begin acc_r = 0.0; acc_i = 0; acc_abs = 0.0; end
    acc_r += s; acc_i += si; acc_abs += sa;
    @(negedge clk);
    in_valid = 1; in_first = first; in_last = last; mode = m; variant = v; out_shift = oshift;
    a = va; b = vb;
    if (last) begin
      exp_t e;
      e.m = m; e.v = v; e.oshift = oshift; e.ref_v = acc_r;
      e.tol = 2.0 * ulp(m, v, acc_r) + acc_abs * r_pow2(-13);
      e.ref_i = acc_i; e.chk_ovf = chk_ovf; e.ovf_exp = ovf_exp;
      q.push_back(e);
    end
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
  endtask

  // ------------------------------------------------------------ checking
  int n_zskip = 0;
  always @(posedge clk) begin
    if (!rst && out_valid && out_zskip) n_zskip++;
    if (!rst && out_valid && out_last) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++; $display("FAIL unexpected result");
      end else begin
        e = q.pop_front();
        checks++;
        if (e.m == MODE_FXP4 || e.m == MODE_FXP8 || e.m == MODE_FXP16) begin
          longint d, want;
          d = 64'sd1 <<< e.oshift;
          want = (e.ref_i >= 0) ? (e.ref_i + d - 1) / d : -((-e.ref_i) / d);
          if (want > 32767) want = 32767;
          if (want < -32768) want = -32768;
          if (longint'($signed(out)) != want) begin
            failures++;
            $display("FAIL fxp mode=%0d oshift=%0d got %0d want %0d", e.m, e.oshift, $signed(out), want);
          end
        end else begin
          real got;
          got = out_val(e.m, e.v, out);
          if (r_abs(got - e.ref_v) > e.tol) begin
            failures++;
            $display("FAIL mode=%0d var=%0d got %g want %g tol %g (code %h)", e.m, e.v, got, e.ref_v, e.tol, out);
          end
        end
        if (e.chk_ovf) begin
          checks++;
          if (out_ovf != e.ovf_exp) begin failures++; $display("FAIL ovf flag %0d", out_ovf); end
        end
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    mode_e m;
    repeat (3) @(posedge clk);
    rst = 0;
    // latency: single FxP8 pair
    send(MODE_FXP8, 0, 0, 1, 1);
    t0 = cyc;
    idle();
    while (!out_valid) @(posedge clk);
    lat = cyc - t0;
    checks++;
    if (lat != 5) begin failures++; $display("FAIL latency %0d", lat); end
    repeat (3) @(posedge clk);

    // single-pair dot products, all modes, back to back
    for (int i = 0; i < 400; i++) begin
      m = mode_e'($urandom_range(0, 7));
      send(m, 1'($urandom), 5'($urandom_range(0, 6)), 1, 1);
    end
    // multi-pair accumulations (throughput: one pair per cycle)
    for (int i = 0; i < 60; i++) begin
      int n;
      m = mode_e'($urandom_range(0, 7));
      n = $urandom_range(2, 8);
      for (int k = 0; k < n; k++)
        send(m, (i % 2) == 1, 5'(4), k == 0, k == n - 1, (k == 1) && (i % 5 == 0));
    end
    // saturation: large FxP16 products, no shift
    begin
      @(negedge clk);
      in_valid = 1; in_first = 1; in_last = 1; mode = MODE_FXP16; out_shift = 0;
      a = OPW'(16'h7fff); b = OPW'(16'h7fff);
      q.push_back('{m: MODE_FXP16, v: 0, oshift: 0, ref_v: 0.0, tol: 0.0,
                    ref_i: 64'sd32767 * 64'sd32767, chk_ovf: 1, ovf_exp: 1});
    end
    send(MODE_FXP8, 0, 0, 1, 1, 0, 1, 0);
    idle();
    t0 = cyc;
    // throughput: the 400+ pairs above were sent one per cycle
    repeat (12) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (n_zskip == 0) begin failures++; $display("FAIL zero-skip never seen"); end
    $display("zero-skips seen: %0d", n_zskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
