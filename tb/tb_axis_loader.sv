// tb_axis_loader: streams random beats with random tvalid gaps and random
// hold (back-pressure) phases into the loader, and checks that every accepted
// beat is written the same cycle to the expected bank and consecutive
// address, that tready is low exactly while hold is high, that ld_done
// follows the tlast beat by one cycle, and the beat counter.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_axis_loader;
  import polaron_pkg::*;
  logic clk = 0, rst = 1, hold = 0, ld_set = 0; logic [7:0] ld_bank = 0, ld_addr = 0;
  logic [127:0] s_axis_tdata = 0; logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic wr_en; logic [7:0] wr_bank, wr_addr; logic [127:0] wr_data; logic ld_done; logic [15:0] beats;
  axis_loader #(.DEPTH(256)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nbeats = 0, nstall = 0, ndone = 0;
  initial begin : watchdog
    repeat (50000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [7:0] bank, addr; bit fired, fired_any, pend;
    pend = 0;
    repeat (2) @(posedge clk); @(negedge clk); rst = 0;
    for (int x = 0; x < 40; x++) begin
      int len;
      bank = 8'($urandom % 65); addr = 8'($urandom);
      ld_set = 1; ld_bank = bank; ld_addr = addr; @(negedge clk); ld_set = 0;
      len = 1 + $urandom % 20;
      for (int b = 0; b < len; ) begin
        hold = ($urandom % 5) == 0;
        // AXI rule: an offered beat stays offered, unchanged, until taken
        if (!pend) begin
          s_axis_tvalid = ($urandom % 4) != 0;
          s_axis_tdata = {$urandom, $urandom, $urandom, $urandom};
          s_axis_tlast = (b == len - 1);
        end
        #1;
        checks++;
        if (s_axis_tready != !hold) begin failures++; $display("FAIL tready vs hold"); end
        if (hold && s_axis_tvalid) nstall++;
        checks++;
        if (wr_en != (s_axis_tvalid && !hold)) begin failures++; $display("FAIL wr_en"); end
        fired = wr_en && s_axis_tlast; fired_any = wr_en;
        if (wr_en) begin
          checks++;
          if (wr_bank != bank || wr_addr != addr || wr_data != s_axis_tdata) begin
            failures++; $display("FAIL write bank %0d addr %0d want %0d/%0d", wr_bank, wr_addr, bank, addr);
          end
          addr++; b++; nbeats++;
        end
        @(negedge clk);
        checks++;
        if (ld_done != fired) begin failures++; $display("FAIL ld_done timing"); end
        ndone += ld_done;
        pend = s_axis_tvalid && !fired_any;
        if (!pend) s_axis_tvalid = 0;
        hold = 0;
      end
    end
    checks++; if (ndone != 40) begin failures++; $display("FAIL ld_done count %0d", ndone); end
    checks++; if (int'(beats) != nbeats) begin failures++; $display("FAIL beats %0d want %0d", beats, nbeats); end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no back-pressure exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
