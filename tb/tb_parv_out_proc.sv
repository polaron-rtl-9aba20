// tb_parv_out_proc: checks stage V. For random accumulator values it decodes
// the 16-bit result and requires RoundTowardPositive: the result is the
// smallest representable value not below the exact one (float and posit
// modes: result >= exact and result - exact < one unit in the last place;
// fixed-point modes: exact ceiling of acc / 2^(GUARD+out_shift), saturated).
// Saturation must raise ovf.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_out_proc;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;
  mode_e mode; logic variant; logic [4:0] out_shift;
  logic signed [ACCW-1:0] acc_m;
  logic signed [EXPW-1:0] acc_e;
  logic [15:0] out; logic ovf;
  parv_out_proc dut (.*);
  int checks = 0, failures = 0;
  function automatic real oval(logic [15:0] x);
    case (mode)
      MODE_BF16: return r_fp(x, 8, 7, 127);
      MODE_FP8, MODE_FP16: return variant ? r_fp(x, 6, 9, 31) : r_fp(x, 5, 10, 15);
      default: return r_posit(x, 16, 1);
    endcase
  endfunction
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nsat = 0;
    for (int t = 0; t < 6000; t++) begin
      real v, g, up;
      mode = mode_e'(t % 8); variant = 1'(t / 8); out_shift = 5'($urandom_range(0, 12));
      acc_m = ACCW'($signed({$urandom, $urandom})) >>> $urandom_range(8, 60);
      acc_e = EXPW'($urandom_range(0, 40)) - 12'sd20;
      if (mode_is_fxp(mode)) acc_e = 0;
      #1;
      v = real'(acc_m) * r_pow2(int'(acc_e) - 16);
      checks++;
      if (mode_is_fxp(mode)) begin
        longint d, want;
        d = 64'sd1 <<< (16 + out_shift);
        want = (acc_m >= 0) ? (acc_m + d - 1) / d : -((-acc_m) / d);
        if (want > 32767) want = 32767;
        if (want < -32768) want = -32768;
        if (want == 32767 || want == -32768) nsat++;
        if (longint'($signed(out)) != want) begin
            failures++; $display("FAIL fxp acc %0d sh %0d got %0d want %0d", acc_m, out_shift, $signed(out), want);
          end
      end else begin
        logic [15:0] nxt;
        g = oval(out);
        if (ovf) begin nsat++; continue; end
        // next representable value above the result
        if (mode == MODE_POSIT8 || mode == MODE_POSIT16) nxt = out + 16'd1;
        else nxt = out[15] ? ((out[14:0] == 0) ? 16'h0001 : out - 16'd1) : out + 16'd1;
        up = oval(nxt);
        if ((mode == MODE_POSIT8 || mode == MODE_POSIT16) && out == 16'h7fff) up = 1.0e300;
        if (!(g >= v && (g == v || up > v)) && !(g == 0.0 && v == 0.0)) begin
          failures++;
          $display("FAIL mode %0d var %0d value %g got %g (code %h) next %g", mode, variant, v, g, out, up);
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
