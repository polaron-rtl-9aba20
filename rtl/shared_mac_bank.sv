// shared_mac_bank: the shared MAC bank of POLARON, NUM_CE PARV-CE elements
// working in lock-step on one precision mode.
//
// All CEs receive the same control (valid/first/last, mode, variant,
// out_shift) and the same activation vector act; CE c receives its own
// weight vector wgt[c], so the bank computes NUM_CE dot products (one output
// neuron / channel per CE) in parallel. When the finished dot products leave
// the CEs (out_last) they are captured in res[] and res_valid pulses; rd_idx
// selects one captured result for the post-processing block.
// ovf_any: some CE saturated on that result; zskip_count counts cycles in
// which the bank skipped an all-zero accumulation (taken from CE 0: the
// activation vector is shared, so a zero activation vector zero-skips all CEs).
// Timing: the PARV-CE latency (5 cycles) plus one capture register.
// The bank and its CE counts (64 / 256) follow the paper; the broadcast
// dataflow is this design's choice.
module shared_mac_bank
  import polaron_pkg::*;
#(
  parameter int unsigned NUM_CE = 64
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  mode_e                     mode,
  input  logic                      variant,
  input  logic [4:0]                out_shift,
  input  logic [OPW-1:0]            act,
  input  logic [OPW-1:0]            wgt [NUM_CE],
  input  logic [$clog2(NUM_CE)-1:0] rd_idx,
  output logic [15:0]               rd_data,
  output logic                      res_valid,
  output logic                      ovf_any,
  output logic [15:0]               zskip_count
);
  logic        o_valid [NUM_CE];
  logic        o_last  [NUM_CE];
  logic [15:0] o_data  [NUM_CE];
  logic        o_ovf   [NUM_CE];
  logic        o_zskip [NUM_CE];
  logic [15:0] res     [NUM_CE];

  for (genvar c = 0; c < NUM_CE; c++) begin : g_ce
    parv_ce u_ce (.clk(clk), .rst(rst), .in_valid(in_valid), .in_first(in_first),
                  .in_last(in_last), .mode(mode), .variant(variant), .out_shift(out_shift),
                  .a(act), .b(wgt[c]), .out_valid(o_valid[c]), .out_last(o_last[c]),
                  .out(o_data[c]), .out_ovf(o_ovf[c]), .out_zskip(o_zskip[c]));
    always_ff @(posedge clk)
      if (o_last[c]) res[c] <= o_data[c];
  end

  assign rd_data = res[rd_idx];

  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid   <= 1'b0;
      ovf_any     <= 1'b0;
      zskip_count <= '0;
    end else begin
      logic any;
      any = 1'b0;
      for (int c = 0; c < NUM_CE; c++) any = any | (o_last[c] & o_ovf[c]);
      res_valid <= o_last[0];
      ovf_any   <= any;
      if (o_valid[0] && o_zskip[0]) zskip_count <= zskip_count + 16'd1;
    end
  end
endmodule
