// tb_control_engine: runs the control engine (8 CEs, 16-word banks, 4-deep
// egress FIFO) against behavioural models of its neighbours: a descriptor
// source with immediate pre-fetch, a MAC bank whose results are ready 6
// cycles after the last vector, a 3-cycle post-processing pipe and an egress
// FIFO drained by a randomly stalling consumer. A 6-layer workload (mode
// changes, a skipped layer, a SoftMax layer, k_len 1..9) is run twice. The
// testbench checks the operand addresses and first/last marks of every
// vector, the order and count of post-processing items (two passes for
// SoftMax, only the second emitting), one out_last per computed layer, that
// the FIFO never overflows, the done pulse, and the skipped-layer,
// mode-switch and stall counters.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_control_engine;
  import polaron_pkg::*;
  localparam int NC = 8, D = 16, FD = 4, NL = 6;
  logic clk = 0, rst = 1, start = 0;
  logic busy, done, advance, rd_en, mac_valid, mac_first, mac_last, res_valid;
  logic [3:0] rd_act_addr, rd_wgt_addr; logic [2:0] res_idx;
  logic pp_valid, pp_emit, sm_pass, sm_clear, pp_out_valid, out_last; logic [2:0] pp_inflight;
  logic [2:0] fifo_count; logic [15:0] skipped_layers, stall_count, mode_switches; logic [31:0] run_cycles;
  layer_desc_t cur_desc; logic cur_valid, done_all;
  control_engine #(.NUM_CE(NC), .DEPTH(D), .FIFO_DEPTH(FD)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- descriptor source
  layer_desc_t descs [NL];
  int ci = NL;
  assign cur_desc  = descs[ci < NL ? ci : NL - 1];
  assign cur_valid = ci < NL;
  assign done_all  = ci >= NL;
  always @(posedge clk) if (start) ci <= 0; else if (advance) ci <= ci + 1;
  // ---- MAC bank: results 6 cycles after the last vector
  logic [5:0] lastpipe = 0;
  always @(posedge clk) lastpipe <= {lastpipe[4:0], mac_last};
  assign res_valid = lastpipe[5];
  // ---- post-processing: 3 cycles
  logic [2:0] vpipe = 0, epipe = 0;
  always @(posedge clk) begin vpipe <= {vpipe[1:0], pp_valid}; epipe <= {epipe[1:0], pp_emit}; end
  assign pp_inflight  = 3'(vpipe[0]) + 3'(vpipe[1]) + 3'(vpipe[2]);
  assign pp_out_valid = vpipe[2] && epipe[2];
  // ---- egress FIFO and consumer
  int cnt = 0; bit ready;
  assign fifo_count = 3'(cnt);
  always @(posedge clk) begin
    int c; c = cnt;
    if (c > 0 && ready) c--;
    if (pp_out_valid) c++;
    if (c > FD) begin failures++; $display("FAIL FIFO overflow"); end
    cnt <= c;
    ready <= ($urandom % 4) == 0;
  end

  // ---- scoreboard
  int k_seen = 0, items = 0, items_left = 0, n_out = 0, n_last = 0, n_stall = 0, n_done = 0, layer_outs = 0;
  int rd_k = 0;
  always @(posedge clk) if (!rst) begin
    if (rd_en) begin
      checks++;
      if (rd_act_addr != 4'(cur_desc.act_base + rd_k) || rd_wgt_addr != 4'(cur_desc.wgt_base + rd_k)) begin
        failures++; $display("FAIL address k=%0d", rd_k);
      end
      rd_k++;
    end
    if (mac_valid) begin
      checks++;
      if (mac_first != (k_seen == 0) || mac_last != (k_seen == int'(cur_desc.k_len) - 1)) begin
        failures++; $display("FAIL first/last at k=%0d", k_seen);
      end
      k_seen++;
    end
    if (res_valid) begin
      checks++;
      if (k_seen != int'(cur_desc.k_len)) begin failures++; $display("FAIL %0d vectors want %0d", k_seen, cur_desc.k_len); end
      k_seen = 0; rd_k = 0; items = 0;
      items_left = (cur_desc.af == AF_SOFTMAX) ? 2 * NC : NC;
    end else if (items_left > 0) begin
      if (pp_valid) begin
        bit second;
        second = (cur_desc.af != AF_SOFTMAX) || items >= NC;
        checks++;
        if (int'(res_idx) != items % NC || pp_emit != second || sm_pass != second || sm_clear != (items % NC == 0)) begin
          failures++; $display("FAIL item %0d idx %0d emit %0d", items, res_idx, pp_emit);
        end
        items++; items_left--;
      end else n_stall++;
    end
    if (pp_out_valid) layer_outs++;
    if (out_last) begin
      checks++; n_last++;
      if (layer_outs != NC) begin failures++; $display("FAIL out_last after %0d outputs", layer_outs); end
      layer_outs = 0;
    end
    if (done) n_done++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    mode_e modes [NL] = '{MODE_FXP8, MODE_FP16, MODE_FXP16, MODE_BF16, MODE_BF16, MODE_POSIT8};
    af_e   afs   [NL] = '{AF_RELU, AF_NONE, AF_NONE, AF_SOFTMAX, AF_TANH, AF_GELU};
    int    kl    [NL] = '{3, 1, 4, 9, 2, 5};
    for (int l = 0; l < NL; l++) begin
      descs[l] = '0;
      descs[l].mode = modes[l]; descs[l].af = afs[l]; descs[l].k_len = 8'(kl[l]);
      descs[l].act_base = 8'($urandom % 8); descs[l].wgt_base = 8'($urandom % 8);
      descs[l].skip = (l == 2);
    end
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    for (int run = 0; run < 2; run++) begin
      int t0;
      checks++; if (busy) begin failures++; $display("FAIL busy before start"); end
      start = 1; @(negedge clk); start = 0;
      t0 = 0;
      while (!done) begin @(negedge clk); t0++; checks++; if (!busy && !done) begin failures++; $display("FAIL busy dropped"); end end
      checks += 4;
      // 6 layers, 1 skipped: 5 computed; modes FXP8 FP16 BF16 BF16 POSIT8 -> 3 switches
      if (skipped_layers != 1) begin failures++; $display("FAIL skipped %0d", skipped_layers); end
      if (mode_switches != 3) begin failures++; $display("FAIL mode switches %0d", mode_switches); end
      if (int'(stall_count) != n_stall || n_stall == 0) begin failures++; $display("FAIL stalls %0d want %0d", stall_count, n_stall); end
      if (n_last != 5 * (run + 1)) begin failures++; $display("FAIL out_last count %0d", n_last); end
      n_stall = 0;
      repeat (3) @(negedge clk);
    end
    checks++; if (n_done != 2) begin failures++; $display("FAIL done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
