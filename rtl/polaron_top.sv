// polaron_top: the POLARON precision-adaptive edge-AI engine.
//
// A host configures the engine over AXI4-Lite (axil_regs): the per-layer
// descriptors of a workload (layer_cfg_table), the number of layers and the
// stream loader's target. Operand vectors arrive on a 128-bit AXI4-Stream
// slave (axis_loader) and are staged in the banked feature memory
// (feature_mem). On start, the control engine (control_engine) walks the
// layers with descriptors supplied ahead of time by the pre-fetcher
// (isa_prefetcher); for each layer the NUM_CE PARV-CEs of the shared MAC
// bank (shared_mac_bank) compute NUM_CE dot products in the layer's
// precision, and the results pass through post-processing (post_proc:
// normalization, scale & shift, DA-VINCI activation, overflow flags) into
// the egress FIFO and out on a 16-bit AXI4-Stream master (axis_egress).
// irq pulses when a run finishes.
// The host CPU, its memory, the AXI interconnect and the AXI DMA are outside
// this module; they connect to the AXI-Lite and AXI-Stream ports.
// Clock and reset: one clock, synchronous active-high reset.
// The block set and connections follow the published system diagram; widths,
// the register map and all handshakes are this design's choices.
module polaron_top
  import polaron_pkg::*;
#(
  parameter int unsigned NUM_CE     = 64,
  parameter int unsigned DEPTH      = 256,
  parameter int unsigned MAX_LAYERS = 16,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst,
  // AXI4-Lite configuration slave
  input  logic [11:0]  s_axil_awaddr,
  input  logic         s_axil_awvalid,
  output logic         s_axil_awready,
  input  logic [31:0]  s_axil_wdata,
  input  logic [3:0]   s_axil_wstrb,
  input  logic         s_axil_wvalid,
  output logic         s_axil_wready,
  output logic [1:0]   s_axil_bresp,
  output logic         s_axil_bvalid,
  input  logic         s_axil_bready,
  input  logic [11:0]  s_axil_araddr,
  input  logic         s_axil_arvalid,
  output logic         s_axil_arready,
  output logic [31:0]  s_axil_rdata,
  output logic [1:0]   s_axil_rresp,
  output logic         s_axil_rvalid,
  input  logic         s_axil_rready,
  // AXI4-Stream input (from DMA)
  input  logic [127:0] s_axis_tdata,
  input  logic         s_axis_tvalid,
  input  logic         s_axis_tlast,
  output logic         s_axis_tready,
  // AXI4-Stream output (to DMA)
  output logic [15:0]  m_axis_tdata,
  output logic         m_axis_tvalid,
  output logic         m_axis_tlast,
  input  logic         m_axis_tready,
  output logic         irq
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned LW  = $clog2(MAX_LAYERS);

  // ---------------------------------------------------------- AXI-Lite
  logic              start, ld_set, desc_wr, busy, done, ovf_sticky;
  logic [LW:0]       num_layers, cur_idx;
  logic [7:0]        ld_bank, ld_addr;
  logic [LW-1:0]     desc_layer;
  logic [1:0]        desc_word;
  logic [31:0]       desc_data, run_cycles;
  logic [15:0]       ovf_count, zskip_count, out_count, skipped, pf_hits, beats, stalls, mode_sw;

  axil_regs #(.MAX_LAYERS(MAX_LAYERS)) u_regs (
    .clk, .rst,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .start, .num_layers, .ld_set, .ld_bank, .ld_addr,
    .desc_wr, .desc_layer, .desc_word, .desc_data,
    .busy, .done, .ovf(ovf_sticky), .cur_layer(8'(cur_idx)), .ovf_count, .zskip_count,
    .out_count, .skipped, .pf_hits, .beats, .cycles(run_cycles), .stalls, .mode_sw);

  // ------------------------------------------------ workload descriptors
  logic          tbl_rd;
  logic [LW-1:0] tbl_layer;
  layer_desc_t   tbl_desc, cur_desc;
  logic          cur_valid, done_all, advance;

  layer_cfg_table #(.MAX_LAYERS(MAX_LAYERS)) u_tbl (
    .clk, .wr_en(desc_wr), .wr_layer(desc_layer), .wr_word(desc_word), .wr_data(desc_data),
    .rd_en(tbl_rd), .rd_layer(tbl_layer), .rd_desc(tbl_desc));

  isa_prefetcher #(.MAX_LAYERS(MAX_LAYERS)) u_pf (
    .clk, .rst, .start, .advance, .num_layers, .rd_en(tbl_rd), .rd_layer(tbl_layer),
    .rd_desc(tbl_desc), .cur_desc, .cur_valid, .cur_idx, .done_all, .hits(pf_hits));

  // ------------------------------------------- stream in, feature memory
  logic              wr_en, rd_en;
  logic [7:0]        wr_bank;
  logic [AW-1:0]     wr_addr, rd_act_addr, rd_wgt_addr;
  logic [OPW-1:0]    wr_data, act;
  logic [OPW-1:0]    wgt [NUM_CE];
  logic              ld_done;

  axis_loader #(.DEPTH(DEPTH), .BANKW(8)) u_ld (
    .clk, .rst, .hold(busy), .ld_set, .ld_bank, .ld_addr(AW'(ld_addr)),
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .wr_en, .wr_bank, .wr_addr, .wr_data, .ld_done, .beats);

  feature_mem #(.NUM_CE(NUM_CE), .DEPTH(DEPTH), .BANKW(8)) u_mem (
    .clk, .wr_en, .wr_bank, .wr_addr, .wr_data,
    .rd_en, .rd_act_addr, .rd_wgt_addr, .rd_act(act), .rd_wgt(wgt));

  // ------------------------------------------------------ MAC bank
  logic                      mac_valid, mac_first, mac_last, res_valid, ovf_any;
  logic [$clog2(NUM_CE)-1:0] res_idx;
  logic [15:0]               res_data;

  shared_mac_bank #(.NUM_CE(NUM_CE)) u_bank (
    .clk, .rst, .in_valid(mac_valid), .in_first(mac_first), .in_last(mac_last),
    .mode(cur_desc.mode), .variant(cur_desc.variant), .out_shift(cur_desc.out_shift),
    .act, .wgt, .rd_idx(res_idx), .rd_data(res_data), .res_valid, .ovf_any, .zskip_count);

  // ----------------------------------------------- post-processing
  logic              pp_valid, pp_emit, sm_pass, sm_clear, pp_out_valid, pp_ovf, out_last;
  logic signed [15:0] pp_out;
  logic [2:0]        pp_inflight;
  logic [$clog2(FIFO_DEPTH):0] fifo_count;
  logic              mac_ovf_seen;

  post_proc u_pp (
    .clk, .rst, .flag_clear(start), .in_valid(pp_valid), .in_emit(pp_emit), .in_code(res_data),
    .mode(cur_desc.mode), .variant(cur_desc.variant), .af(cur_desc.af),
    .sm_pass, .sm_clear, .scale(cur_desc.scale), .pp_shift(cur_desc.pp_shift),
    .bias(cur_desc.bias), .out_valid(pp_out_valid), .out_data(pp_out),
    .ovf_sticky(pp_ovf), .ovf_count, .out_count, .inflight(pp_inflight));

  always_ff @(posedge clk) begin
    if (rst || start) mac_ovf_seen <= 1'b0;
    else if (ovf_any) mac_ovf_seen <= 1'b1;
  end
  assign ovf_sticky = pp_ovf | mac_ovf_seen;

  // ------------------------------------------------- control engine
  control_engine #(.NUM_CE(NUM_CE), .DEPTH(DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_ctl (
    .clk, .rst, .start, .busy, .done, .cur_desc, .cur_valid, .done_all, .advance,
    .rd_en, .rd_act_addr, .rd_wgt_addr, .mac_valid, .mac_first, .mac_last, .res_valid,
    .res_idx, .pp_valid, .pp_emit, .sm_pass, .sm_clear, .pp_inflight,
    .pp_out_valid, .fifo_count, .out_last, .skipped_layers(skipped), .stall_count(stalls),
    .mode_switches(mode_sw), .run_cycles);

  // ------------------------------------------------------ stream out
  axis_egress #(.DEPTH(FIFO_DEPTH)) u_eg (
    .clk, .rst, .push(pp_out_valid), .push_data(pp_out), .push_last(out_last), .count(fifo_count),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready);

  assign irq = done;
endmodule
