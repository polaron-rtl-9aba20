// tb_parv_accum: checks stage IV. With equal exponents (the fixed-point
// case) the accumulator must equal the exact running sum of the inputs split
// over four carry-save words; with mixed exponents the accumulator value must
// track the real-valued sum within the alignment error. Also checks in_first
// restart, the zero-skip hold and skip flag, and the one-cycle latency.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_parv_accum;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_all_zero = 0;
  logic signed [EXPW-1:0] in_e = 0;
  logic [ALW-1:0] in_w [4];
  logic signed [ACCW-1:0] acc_m;
  logic signed [EXPW-1:0] acc_e;
  logic valid_o, skip_o, acc_ovf;
  parv_accum dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #10000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic put(longint v, int e, bit first, bit z);
    longint p0, p1, p2;
    p0 = longint'($urandom) - 64'sd2147483648; p1 = longint'($urandom); p2 = -longint'($urandom);
    @(negedge clk);
    in_valid = 1; in_first = first; in_all_zero = z; in_e = EXPW'(e);
    in_w[0] = ALW'(p0); in_w[1] = ALW'(p1); in_w[2] = ALW'(p2); in_w[3] = ALW'(v - p0 - p1 - p2);
  endtask
  initial begin
    real ref_r, got_r;
    longint ref_i;
    for (int i = 0; i < 4; i++) in_w[i] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    // exact integer accumulation
    for (int t = 0; t < 400; t++) begin
      longint v; bit f, z;
      f = (t % 10 == 0); z = (t % 7 == 3) && !f;
      v = z ? 0 : (longint'($urandom) - 64'sd2147483648) <<< 10;
      if (f) ref_i = 0;
      if (!z) ref_i += v;
      put(v, 0, f, z);
      @(posedge clk); #1;
      checks++;
      if (!valid_o || acc_m != ref_i || acc_e != 0 || skip_o != z) begin
        failures++; $display("FAIL int t=%0d acc %0d want %0d skip %0d", t, acc_m, ref_i, skip_o);
      end
    end
    // mixed exponents
    for (int t = 0; t < 400; t++) begin
      longint v; int e; bit f;
      f = (t % 8 == 0);
      e = $urandom_range(0, 20) - 10;
      v = (longint'($urandom) - 64'sd2147483648) <<< 16;
      if (f) ref_r = 0.0;
      ref_r += real'(v) * r_pow2(e - 16);
      put(v, e, f, 0);
      @(posedge clk); #1;
      got_r = real'(acc_m) * r_pow2(int'(acc_e) - 16);
      checks++;
      if (r_abs(got_r - ref_r) > 8.0 * r_pow2(int'(acc_e) - 16) * 8.0) begin
        failures++; $display("FAIL mixed t=%0d got %g want %g", t, got_r, ref_r);
      end
    end
    @(negedge clk); in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
