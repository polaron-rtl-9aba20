// tb_pp_scale_shift: checks y = sat16(floor(x*scale / 2^(8+pp_shift)) + bias)
// and the saturation flag for random operands.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_pp_scale_shift;
  logic signed [15:0] x, scale, bias, y; logic [3:0] pp_shift; logic sat;
  pp_scale_shift dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nsat = 0;
    for (int t = 0; t < 5000; t++) begin
      longint p, r; bit ws;
      x = 16'($urandom); scale = 16'($urandom); bias = 16'($urandom); pp_shift = 4'($urandom);
      #1;
      p = longint'(x) * longint'(scale);
      r = p >>> (8 + pp_shift);
      r = r + longint'(bias);
      ws = (r > 32767) || (r < -32768);
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
      nsat += ws;
      checks++;
      if (longint'(y) != r || sat != ws) begin failures++; $display("FAIL %0d*%0d>>%0d+%0d: %0d want %0d", x, scale, pp_shift, bias, y, r); end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
