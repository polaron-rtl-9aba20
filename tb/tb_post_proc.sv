// tb_post_proc: drives the post-processing chain (normalize, scale & shift,
// activation) with random fixed-point CE results at random issue times and
// checks each output against an independent integer model of
// y = act(sat16(floor(x*scale / 2^(8+pp_shift)) + bias)) for the identity and
// ReLU activations. Also checks the 3-cycle latency, that items with
// in_emit = 0 produce no output, and the ovf / out / inflight counters.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_post_proc;
  import polaron_pkg::*;
  logic clk = 0, rst = 1, flag_clear = 0, in_valid = 0, in_emit = 0;
  logic [15:0] in_code = 0; mode_e mode = MODE_FXP8; logic variant = 0; af_e af = AF_NONE;
  logic sm_pass = 0, sm_clear = 0; logic signed [15:0] scale = 0, bias = 0; logic [3:0] pp_shift = 0;
  logic out_valid; logic signed [15:0] out_data; logic ovf_sticky; logic [15:0] ovf_count, out_count; logic [2:0] inflight;
  post_proc dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, n_exp_ovf = 0, n_emit = 0;
  typedef struct { int t; int v; } exp_t;
  exp_t q[$];
  always @(posedge clk) cyc++;
  initial begin : watchdog
    repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // output monitor: value and exact latency of 3 cycles
  always @(negedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = q.pop_front();
      if (int'(out_data) != e.v || cyc - e.t != 3) begin
        failures++; $display("FAIL got %0d at +%0d want %0d at +3", out_data, cyc - e.t, e.v);
      end
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_emit  = ($urandom % 8) != 0;
      in_code  = 16'($urandom); scale = 16'($urandom % 1024); bias = 16'($urandom);
      pp_shift = 4'($urandom % 4); af = (($urandom % 2) != 0) ? AF_RELU : AF_NONE;
      mode = (($urandom % 2) != 0) ? MODE_FXP8 : MODE_FXP16;
      if (t > 2990) in_valid = 0;
      if (in_valid) begin
        longint r; bit ws;
        r = (longint'($signed(in_code)) * longint'(scale)) >>> (8 + pp_shift);
        r = r + longint'(bias);
        ws = (r > 32767) || (r < -32768);
        if (r > 32767) r = 32767; if (r < -32768) r = -32768;
        if (af == AF_RELU && r < 0) r = 0;
        n_exp_ovf += ws;
        if (in_emit) begin q.push_back('{cyc, int'(r)}); n_emit++; end
      end
      checks++;
      if (int'(inflight) > 3) begin failures++; $display("FAIL inflight %0d", inflight); end
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    #1;
    checks += 5;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    if (int'(ovf_count) != n_exp_ovf) begin failures++; $display("FAIL ovf_count %0d want %0d", ovf_count, n_exp_ovf); end
    if (ovf_sticky != (n_exp_ovf != 0) || n_exp_ovf == 0) begin failures++; $display("FAIL ovf_sticky / no overflow seen"); end
    if (int'(out_count) != n_emit) begin failures++; $display("FAIL out_count %0d want %0d", out_count, n_emit); end
    if (inflight != 0) begin failures++; $display("FAIL inflight not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
