// tb_pp_normalize: checks the conversion of every 16-bit CE output format to
// Q8.8: truncation toward zero of value*256, saturation with the sat flag,
// fixed-point pass-through.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_pp_normalize;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;
  mode_e mode; logic variant; logic [15:0] code;
  logic signed [15:0] q88; logic sat;
  pp_normalize dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nsat = 0;
    for (int t = 0; t < 8000; t++) begin
      real v; longint want; bit ws;
      mode = mode_e'(t % 8); variant = 1'(t / 8); code = 16'($urandom);
      #1;
      case (mode)
        MODE_BF16:           v = r_fp(code, 8, 7, 127);
        MODE_FP8, MODE_FP16: v = variant ? r_fp(code, 6, 9, 31) : r_fp(code, 5, 10, 15);
        MODE_POSIT8, MODE_POSIT16: v = r_posit(code, 16, 1);
        default:             v = real'($signed(code)) / 256.0;
      endcase
      v = v * 256.0;
      ws = 0;
      if (v >= 32768.0) begin want = 32767; ws = 1; end
      else if (v < -32768.0) begin want = -32768; ws = 1; end
      else want = longint'($rtoi(v));
      if (mode_is_fxp(mode)) ws = 0;
      nsat += ws;
      checks++;
      if (longint'(q88) != want || sat != ws) begin
        failures++; $display("FAIL mode %0d var %0d code %h: got %0d/%0d want %0d/%0d", mode, variant, code, q88, sat, want, ws);
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
