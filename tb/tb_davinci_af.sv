// tb_davinci_af: sweeps every activation function over its input range and
// compares with real-arithmetic references (GELU against its tanh form), a
// two-pass SoftMax over 16 values, and the two-cycle latency.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_davinci_af;
  import polaron_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_tag = 0, sm_pass = 0, sm_clear = 0;
  af_e af = AF_NONE;
  logic signed [15:0] x = 0, y;
  logic out_valid, out_tag, ovf;
  davinci_af dut (.*);
  int checks = 0, failures = 0;
  function automatic real sg(real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic real ref_f(af_e f, real v);
    case (f)
      AF_RELU: return (v > 0) ? v : 0.0;
      AF_SIGMOID: return sg(v);
      AF_TANH: return 2.0 * sg(2.0 * v) - 1.0;
      AF_SWISH: return v * sg(v);
      AF_GELU: return 0.5 * v * (1.0 + 2.0 * sg(2.0 * 0.7978845608 * (v + 0.044715 * v * v * v)) - 1.0);
      AF_SELU: return (v > 0) ? 1.0507 * v : 1.0507 * 1.67326 * ($exp(v) - 1.0);
      default: return v;
    endcase
  endfunction
  function automatic real ab(real v); return v < 0 ? -v : v; endfunction
  initial begin : watchdog
    #10000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real xs [16]; real ssum;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int f = 0; f < 7; f++) begin
      for (int i = -2048; i <= 2048; i += 37) begin
        real want, got;
        @(negedge clk);
        af = af_e'(f); x = 16'(i); in_valid = 1; in_tag = 1;
        @(negedge clk); in_valid = 0;
        @(posedge clk); #1;
        checks++;
        if (!out_valid || !out_tag) begin failures++; $display("FAIL latency"); end
        want = ref_f(af_e'(f), real'(i) / 256.0);
        got  = real'(y) / 256.0;
        if (ab(got - want) > 0.03 + 0.01 * ab(want)) begin
          failures++; $display("FAIL af %0d x %f got %f want %f", f, real'(i) / 256.0, got, want);
        end
      end
    end
    // SoftMax over 16 values
    ssum = 0.0;
    for (int i = 0; i < 16; i++) begin xs[i] = real'($urandom_range(0, 1024)) / 256.0 - 2.0; ssum += $exp(xs[i]); end
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        af = AF_SOFTMAX; sm_pass = 1'(p); sm_clear = (i == 0); in_valid = 1; in_tag = 1'(p);
        x = 16'($rtoi(xs[i] * 256.0));
      end
    @(negedge clk); in_valid = 0;
    // pass-1 results leave two cycles after their inputs; re-run them one at a time
    for (int i = 0; i < 16; i++) begin
      real want;
      @(negedge clk);
      af = AF_SOFTMAX; sm_pass = 1; sm_clear = 0; in_valid = 1; x = 16'($rtoi(xs[i] * 256.0));
      @(negedge clk); in_valid = 0;
      @(posedge clk); #1;
      want = $exp(real'(x) / 256.0) / ssum;
      checks++;
      if (ab(real'(y) / 256.0 - want) > 0.03) begin failures++; $display("FAIL softmax %f want %f", real'(y) / 256.0, want); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
