// tb_shared_mac_bank: a 4-CE bank computes random FxP8 matrix-vector
// products (shared activation vector, one weight vector per CE, 1..6 vectors
// per dot product, output shift 0..2). Each captured result is read through
// rd_idx and compared with an integer model (ceil(sum / 2^shift), saturated
// to int16). Also checks the 6-cycle latency from the last input vector to
// res_valid (5 CE stages + capture), the overflow flag on a saturating dot
// product and the zero-skip count for all-zero activation vectors.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_shared_mac_bank;
  import polaron_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst = 1, in_valid = 0, in_first = 0, in_last = 0; mode_e mode = MODE_FXP8; logic variant = 0;
  logic [4:0] out_shift = 0; logic [127:0] act = 0, wgt [NC]; logic [1:0] rd_idx = 0;
  logic [15:0] rd_data, zskip_count; logic res_valid, ovf_any;
  shared_mac_bank #(.NUM_CE(NC)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin : watchdog
    repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nzero = 0, n_ovf = 0;
    for (int c = 0; c < NC; c++) wgt[c] = '0;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      longint acc [NC]; int k, sh, t_last; bit big, sat_any;
      k = 1 + $urandom % 6; sh = $urandom % 3; big = (t % 25) == 7;
      for (int c = 0; c < NC; c++) acc[c] = 0;
      for (int i = 0; i < k; i++) begin
        bit zv; zv = ($urandom % 8) == 0;
        act = '0;
        for (int c = 0; c < NC; c++) wgt[c] = '0;
        for (int l = 0; l < 4; l++) begin
          logic [7:0] x; x = big ? 8'h80 : (zv ? 8'h00 : 8'($urandom));
          act[l*8 +: 8] = x;
          for (int c = 0; c < NC; c++) begin
            logic [7:0] w; w = big ? 8'h80 : 8'($urandom | 1);
            wgt[c][l*8 +: 8] = w;
            acc[c] += longint'($signed(x)) * longint'($signed(w));
          end
        end
        nzero += zv && !big;
        in_valid = 1; in_first = (i == 0); in_last = (i == k - 1); out_shift = 5'(sh);
        t_last = cyc;
        @(negedge clk);
      end
      in_valid = 0; in_first = 0; in_last = 0;
      while (!res_valid) @(negedge clk);
      checks++;
      if (cyc - t_last != 6) begin failures++; $display("FAIL latency %0d", cyc - t_last); end
      sat_any = 0;
      for (int c = 0; c < NC; c++) begin
        longint d, want;
        d = 64'sd1 <<< sh;
        want = (acc[c] >= 0) ? (acc[c] + d - 1) / d : -((-acc[c]) / d);
        if (want > 32767 || want < -32768) sat_any = 1;
        if (want > 32767) want = 32767;
        if (want < -32768) want = -32768;
        rd_idx = 2'(c); #1;
        checks++;
        if (longint'($signed(rd_data)) != want) begin failures++; $display("FAIL ce %0d got %0d want %0d", c, $signed(rd_data), want); end
      end
      checks++;
      if (ovf_any != sat_any || (big && !sat_any)) begin failures++; $display("FAIL ovf_any %0d want %0d", ovf_any, sat_any); end
      n_ovf += sat_any;
      @(negedge clk);
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL no overflow exercised"); end
    checks++;
    if (int'(zskip_count) != nzero || nzero == 0) begin failures++; $display("FAIL zskip %0d want %0d", zskip_count, nzero); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
