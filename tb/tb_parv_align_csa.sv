// tb_parv_align_csa: checks that the four carry-save words of stage III sum
// (modulo 2^ALW) to the signed, max-exponent-aligned, guard-extended sum of
// the lane products, each truncated as a right shift of its magnitude.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_align_csa;
  import polaron_pkg::*;
  logic p_sign [LANES], p_zero [LANES];
  logic signed [EXPW-1:0] p_exp [LANES];
  logic [PRODW-1:0] p_mag [LANES];
  logic signed [EXPW-1:0] e_max;
  logic [ALW-1:0] w [4];
  parv_align_csa dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint s; logic [ALW-1:0] got, want;
      int mx;
      mx = -1000;
      for (int l = 0; l < LANES; l++) begin
        p_sign[l] = 1'($urandom); p_zero[l] = ($urandom_range(0, 7) == 0);
        p_exp[l]  = EXPW'($urandom_range(0, (t % 3 == 0) ? 0 : 60)) - 12'sd30;
        p_mag[l]  = $urandom;
        if (!p_zero[l] && int'(p_exp[l]) > mx) mx = int'(p_exp[l]);
      end
      e_max = (mx == -1000) ? '0 : EXPW'(mx);
      #1;
      s = 0;
      for (int l = 0; l < LANES; l++) begin
        longint m; int d;
        if (p_zero[l]) continue;
        d = int'(e_max) - int'(p_exp[l]);
        m = (d >= 48) ? 0 : ((longint'(p_mag[l]) <<< 16) >>> d);
        s += p_sign[l] ? -m : m;
      end
      got  = w[0] + w[1] + w[2] + w[3];
      want = ALW'(s);
      checks++;
      if (got != want) begin failures++; $display("FAIL got %h want %h", got, want); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
