// tb_feature_mem: writes random vectors into random banks and addresses of a
// small feature memory (4 weight banks, 16 words) while reading random
// addresses, and checks every read against a shadow copy, including that the
// data appears exactly one cycle after rd_en and that each weight bank
// returns its own word.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_feature_mem;
  import polaron_pkg::*;
  localparam int NC = 4, D = 16;
  logic clk = 0, wr_en = 0, rd_en = 0; logic [7:0] wr_bank = 0;
  logic [3:0] wr_addr = 0, rd_act_addr = 0, rd_wgt_addr = 0; logic [127:0] wr_data = 0;
  logic [127:0] rd_act, rd_wgt [NC];
  feature_mem #(.NUM_CE(NC), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  logic [127:0] sh [NC+1][D];
  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    // fill every word so nothing read is uninitialised
    for (int b = 0; b <= NC; b++) for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_bank = 8'(b); wr_addr = 4'(a);
      wr_data = {$urandom, $urandom, $urandom, $urandom}; sh[b][a] = wr_data;
    end
    for (int t = 0; t < 2000; t++) begin
      logic [3:0] aa, wa;
      @(negedge clk);
      wr_en = $urandom % 2; wr_bank = 8'($urandom % (NC + 1)); wr_addr = 4'($urandom);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      rd_en = 1; aa = 4'($urandom); wa = 4'($urandom); rd_act_addr = aa; rd_wgt_addr = wa;
      // read-before-write: expected data is the shadow before this cycle's write
      begin
        logic [127:0] ea, ew [NC];
        ea = sh[0][aa]; for (int c = 0; c < NC; c++) ew[c] = sh[c+1][wa];
        if (wr_en) sh[wr_bank][wr_addr] = wr_data;
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        checks++; if (rd_act !== ea) begin failures++; $display("FAIL act %0d", aa); end
        for (int c = 0; c < NC; c++) begin
          checks++; if (rd_wgt[c] !== ew[c]) begin failures++; $display("FAIL wgt bank %0d addr %0d", c, wa); end
        end
        // rd_en low: outputs hold
        rd_act_addr = aa + 1;
        @(negedge clk);
        checks++; if (rd_act !== ea) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
