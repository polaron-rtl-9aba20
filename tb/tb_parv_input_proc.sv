// tb_parv_input_proc: checks that every lane of every mode unpacks to
// (-1)^sign * sig * 2^exp equal to the element value computed by independent
// real-arithmetic decoders, and that unused lanes are flagged zero.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_input_proc;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;
  mode_e mode; logic variant;
  logic [OPW-1:0] a, b;
  unpacked_t a_u [LANES], b_u [LANES];
  parv_input_proc dut (.*);
  int checks = 0, failures = 0;
  function automatic real ev(mode_e m, bit v, logic [15:0] x);
    case (m)
      MODE_FXP4: return r_fxp(x, 4);   MODE_FXP8: return r_fxp(x, 8);
      MODE_FXP16: return r_fxp(x, 16);
      MODE_FP8:  return v ? r_fp(x, 5, 2, 15) : r_fp(x, 4, 3, 7);
      MODE_BF16: return r_fp(x, 8, 7, 127);
      MODE_FP16: return v ? r_fp(x, 6, 9, 31) : r_fp(x, 5, 10, 15);
      MODE_POSIT8: return r_posit(x, 8, 0);
      default:   return r_posit(x, 16, 1);
    endcase
  endfunction
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int n, w;
      mode = mode_e'(t % 8); variant = 1'(t / 8);
      n = (t % 8 == 0 || t % 8 == 1) ? 16 : (t % 8 == 2 || t % 8 == 3 || t % 8 == 4) ? 4 : 1;
      w = (t % 8 == 0) ? 4 : (t % 8 <= 3) ? 8 : 16;
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (l >= n) begin
          if (!a_u[l].zero || !b_u[l].zero) begin failures++; $display("FAIL unused lane %0d not zero", l); end
        end else begin
          real ra, da;
          logic [15:0] x;
          x  = 16'(a >> (l * w)) & 16'((32'd1 << w) - 1);
          ra = ev(mode, variant, x);
          da = a_u[l].zero ? 0.0 : real'(a_u[l].sig) * r_pow2(int'(a_u[l].exp));
          if (a_u[l].sign) da = -da;
          if (ra != da) begin
            failures++;
            $display("FAIL mode %0d var %0d lane %0d code %h: got %g want %g", mode, variant, l, x, da, ra);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
