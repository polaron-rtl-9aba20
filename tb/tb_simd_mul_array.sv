// tb_simd_mul_array: checks the 16x4 / 4x8 / 1x16 significand products of
// the shared Booth multiplier array against plain integer multiplication.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_simd_mul_array;
  import polaron_pkg::*;
  mulw_e mulw;
  logic [SIGW-1:0]  a_sig [LANES], b_sig [LANES];
  logic [PRODW-1:0] prod  [LANES];
  simd_mul_array dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int w, n;
      mulw = mulw_e'(t % 3);
      w = (t % 3 == 0) ? 4 : (t % 3 == 1) ? 8 : 16;
      n = (t % 3 == 0) ? 16 : (t % 3 == 1) ? 4 : 1;
      for (int l = 0; l < LANES; l++) begin
        a_sig[l] = 16'($urandom) & 16'((32'd1 << w) - 1);
        b_sig[l] = 16'($urandom) & 16'((32'd1 << w) - 1);
      end
      #1;
      for (int l = 0; l < n; l++) begin
        checks++;
        if (prod[l] != 32'(a_sig[l]) * 32'(b_sig[l])) begin
          failures++;
          $display("FAIL w=%0d lane %0d: %0d * %0d = %0d", w, l, a_sig[l], b_sig[l], prod[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
