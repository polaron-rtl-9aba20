// tb_axil_regs: AXI4-Lite master tasks exercise every register of the
// configuration slave: the one-cycle start and load-pointer pulses, the
// NUM_LAYERS and LOAD read-back, descriptor word writes (layer, word, data
// decoded from the address), every status/counter read, the sticky done bit,
// and held responses while bready / rready are low.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_axil_regs;
  import polaron_pkg::*;
  logic clk = 0, rst = 1;
  logic [11:0] s_awaddr = 0, s_araddr = 0; logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0; logic [3:0] s_wstrb = 4'hf;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid; logic [1:0] s_bresp, s_rresp; logic [31:0] s_rdata;
  logic start, ld_set, desc_wr; logic [4:0] num_layers; logic [7:0] ld_bank, ld_addr;
  logic [3:0] desc_layer; logic [1:0] desc_word; logic [31:0] desc_data;
  logic busy = 0, done = 0, ovf = 0; logic [7:0] cur_layer = 0;
  logic [15:0] ovf_count = 0, zskip_count = 0, out_count = 0, skipped = 0, pf_hits = 0, beats = 0, stalls = 0, mode_sw = 0;
  logic [31:0] cycles = 0;
  axil_regs #(.MAX_LAYERS(16)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_start = 0, n_ldset = 0, n_desc = 0;
  logic [3:0] last_dl; logic [1:0] last_dw; logic [31:0] last_dd;
  always @(posedge clk) if (!rst) begin
    n_start += start; n_ldset += ld_set;
    if (desc_wr) begin n_desc++; last_dl = desc_layer; last_dw = desc_word; last_dd = desc_data; end
  end
  initial begin : watchdog
    repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(input logic [11:0] a, input logic [31:0] d, input int bdelay = 0);
    @(negedge clk); s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    checks++; if (!s_bvalid || s_bresp != 0) begin failures++; $display("FAIL no bvalid"); end
    repeat (bdelay) begin @(negedge clk); checks++; if (!s_bvalid) begin failures++; $display("FAIL bvalid dropped"); end end
    s_bready = 1; @(negedge clk); s_bready = 0;
    checks++; if (s_bvalid) begin failures++; $display("FAIL bvalid stuck"); end
  endtask
  task automatic rd(input logic [11:0] a, input logic [31:0] exp_d, input int rdelay = 0);
    @(negedge clk); s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    repeat (rdelay) @(negedge clk);
    checks++;
    if (!s_rvalid || s_rdata != exp_d) begin failures++; $display("FAIL read %h: %h want %h", a, s_rdata, exp_d); end
    s_rready = 1; @(negedge clk); s_rready = 0;
  endtask
  initial begin
    repeat (2) @(posedge clk); @(negedge clk); rst = 0;
    wr(12'h008, 32'd7, 2);       rd(12'h008, 32'd7, 3);
    checks++; if (num_layers != 7) begin failures++; $display("FAIL num_layers"); end
    wr(12'h00C, 32'h0000_2a13);  rd(12'h00C, 32'h0000_2a13);
    checks++; if (ld_bank != 8'h2a || ld_addr != 8'h13 || n_ldset != 1) begin failures++; $display("FAIL load pointer"); end
    wr(12'h000, 32'd1);
    checks++; if (n_start != 1) begin failures++; $display("FAIL start pulses %0d", n_start); end
    for (int l = 0; l < 16; l++) for (int w = 0; w < 4; w++) begin
      logic [31:0] d; d = $urandom;
      wr(12'h100 + 12'(16 * l + 4 * w), d);
      checks++; if (last_dl != 4'(l) || last_dw != 2'(w) || last_dd != d) begin failures++; $display("FAIL desc %0d/%0d", l, w); end
    end
    checks++; if (n_desc != 64 || n_start != 1 || n_ldset != 1) begin failures++; $display("FAIL stray pulses"); end
    // status and counters
    ovf_count = 16'h1111; zskip_count = 16'h2222; out_count = 16'h3333; skipped = 16'h4444; pf_hits = 16'h5555;
    beats = 16'h6666; cycles = 32'h7777_8888; stalls = 16'h9999; mode_sw = 16'haaaa;
    busy = 1; ovf = 1; cur_layer = 8'd5;
    rd(12'h004, 32'h0000_0505);
    @(negedge clk); done = 1; busy = 0; @(negedge clk); done = 0;
    rd(12'h004, 32'h0000_0506);
    rd(12'h010, 32'h1111); rd(12'h014, 32'h2222); rd(12'h018, 32'h3333); rd(12'h01C, 32'h4444);
    rd(12'h020, 32'h5555); rd(12'h024, 32'h6666); rd(12'h028, 32'h7777_8888); rd(12'h02C, 32'h9999);
    rd(12'h030, 32'haaaa); rd(12'h034, 32'h0);
    // done is cleared by the next start
    wr(12'h000, 32'd1); rd(12'h004, 32'h0000_0504);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
