// tb_parv_sign_exp: checks product sign (XOR), product exponent (sum), zero
// flags and the maximum exponent over non-zero lanes against a direct model.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_sign_exp;
  import polaron_pkg::*;
  unpacked_t a_u [LANES], b_u [LANES];
  logic p_sign [LANES], p_zero [LANES];
  logic signed [EXPW-1:0] p_exp [LANES];
  logic signed [EXPW-1:0] e_max;
  logic all_zero;
  parv_sign_exp dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int mx; bit any;
      for (int l = 0; l < LANES; l++) begin
        a_u[l] = '{sign: 1'($urandom), zero: ($urandom_range(0, 9) == 0) || (t % 50 == 0),
                   exp: EXPW'($urandom_range(0, 400)) - 12'sd200, sig: 16'($urandom)};
        b_u[l] = '{sign: 1'($urandom), zero: ($urandom_range(0, 9) == 0),
                   exp: EXPW'($urandom_range(0, 400)) - 12'sd200, sig: 16'($urandom)};
      end
      #1;
      mx = -100000; any = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (p_sign[l] != (a_u[l].sign ^ b_u[l].sign) || p_zero[l] != (a_u[l].zero | b_u[l].zero) ||
            int'(p_exp[l]) != int'(a_u[l].exp) + int'(b_u[l].exp)) begin
          failures++; $display("FAIL lane %0d", l);
        end
        if (!(a_u[l].zero | b_u[l].zero)) begin
          any = 1;
          if (int'(a_u[l].exp) + int'(b_u[l].exp) > mx) mx = int'(a_u[l].exp) + int'(b_u[l].exp);
        end
      end
      checks++;
      if (all_zero != !any || (any && int'(e_max) != mx)) begin
        failures++; $display("FAIL e_max %0d want %0d (all_zero %0d)", e_max, mx, all_zero);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
