// tb_isa_prefetcher: the pre-fetcher reads from a behavioural one-cycle
// descriptor table. The testbench starts runs of random length, advances at
// random times whenever a descriptor is valid, and checks that cur_desc is
// always the descriptor of cur_idx, that an advance after the next
// descriptor was fetched makes it valid in the very next cycle (a pre-fetch
// hit), the hit count, and done_all.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_isa_prefetcher;
  import polaron_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst = 1, start = 0, advance = 0; logic [4:0] num_layers = 0;
  logic rd_en; logic [3:0] rd_layer; layer_desc_t rd_desc, cur_desc; logic cur_valid, done_all; logic [4:0] cur_idx; logic [15:0] hits;
  isa_prefetcher #(.MAX_LAYERS(L)) dut (.*);
  always #5 clk = ~clk;
  layer_desc_t table_m [L];
  always @(posedge clk) if (rd_en) rd_desc <= table_m[rd_layer];
  int checks = 0, failures = 0, exp_hits = 0;
  initial begin : watchdog
    repeat (50000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int l = 0; l < L; l++) table_m[l] = layer_desc_t'({$urandom, $urandom, $urandom, $urandom});
    repeat (2) @(posedge clk); @(negedge clk); rst = 0;
    for (int r = 0; r < 50; r++) begin
      int n, waitc, hold_c;
      n = 1 + $urandom % L; num_layers = 5'(n);
      start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < n; i++) begin
        waitc = 0;
        while (!cur_valid) begin @(negedge clk); waitc++; end
        checks++;
        if (int'(cur_idx) != i || cur_desc != table_m[i] || done_all) begin
          failures++; $display("FAIL run %0d layer %0d: idx %0d", r, i, cur_idx);
        end
        // a layer that lasts at least 3 cycles lets the next descriptor arrive
        hold_c = $urandom % 5;
        repeat (hold_c) @(negedge clk);
        advance = 1; @(negedge clk); advance = 0;
        if (i < n - 1) begin
          if (cur_valid) exp_hits++;
          else if (hold_c + waitc >= 3) begin
            checks++; failures++; $display("FAIL no pre-fetch hit after %0d cycles", hold_c + waitc);
          end
        end
      end
      checks++; if (!done_all) begin failures++; $display("FAIL done_all"); end
    end
    checks++; if (int'(hits) != exp_hits || exp_hits == 0) begin failures++; $display("FAIL hits %0d want %0d", hits, exp_hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
