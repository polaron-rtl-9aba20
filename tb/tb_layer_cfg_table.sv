// tb_layer_cfg_table: writes random descriptor words for every layer, then
// reads descriptors back in random order (with further random writes) and
// checks the assembled 128-bit descriptor and its field positions, one cycle
// after rd_en.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_layer_cfg_table;
  import polaron_pkg::*;
  localparam int L = 16;
  logic clk = 0, wr_en = 0, rd_en = 0; logic [3:0] wr_layer = 0, rd_layer = 0; logic [1:0] wr_word = 0;
  logic [31:0] wr_data = 0; layer_desc_t rd_desc;
  layer_cfg_table #(.MAX_LAYERS(L)) dut (.*);
  always #5 clk = ~clk;
  logic [31:0] sh [L][4];
  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int l = 0; l < L; l++) for (int w = 0; w < 4; w++) begin
      @(negedge clk); wr_en = 1; wr_layer = 4'(l); wr_word = 2'(w); wr_data = $urandom; sh[l][w] = wr_data;
    end
    for (int t = 0; t < 3000; t++) begin
      logic [3:0] rl; logic wr_en_q;
      @(negedge clk);
      wr_en = $urandom % 2; wr_layer = 4'($urandom); wr_word = 2'($urandom); wr_data = $urandom;
      rd_en = 1; rl = 4'($urandom); rd_layer = rl; wr_en_q = wr_en;
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      checks++;
      if (rd_desc !== {sh[rl][3], sh[rl][2], sh[rl][1], sh[rl][0]}) begin failures++; $display("FAIL layer %0d", rl); end
      checks++;
      if (rd_desc.mode !== mode_e'(sh[rl][0][2:0]) || rd_desc.variant !== sh[rl][0][3] || rd_desc.skip !== sh[rl][0][7] ||
          rd_desc.k_len !== sh[rl][2][15:8] || rd_desc.scale !== sh[rl][3][15:0] || rd_desc.bias !== sh[rl][3][31:16] ||
          rd_desc.act_base !== sh[rl][1][31:24] || rd_desc.out_shift !== sh[rl][1][23:19]) begin
        failures++; $display("FAIL field layout layer %0d", rl);
      end
      // the read returned the contents before this cycle's write
      if (wr_en_q) sh[wr_layer][wr_word] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
