// feature_mem: the POLARON feature memory, a banked staging buffer between the
// AXI-Stream input and the shared MAC bank.
//
// Bank 0 holds activation vectors; banks 1..NUM_CE hold the weight vectors of
// PARV-CE 0..NUM_CE-1. Every word is one 128-bit operand vector. The write
// port (from the stream loader) writes one word of one bank per cycle. The
// read port reads, in the same cycle, one activation word (broadcast to all
// CEs) and the word at the same weight address of every weight bank, so all
// CEs receive their operands in parallel: this is the multi-port,
// non-unified access the MAC bank needs.
// Timing: synchronous read, data valid the cycle after rd_en.
// The paper names the feature memory and a configurable multi-port memory;
// the bank layout and sizes (DEPTH words per bank) are this design's choice.
module feature_mem
  import polaron_pkg::*;
#(
  parameter int unsigned NUM_CE = 64,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned BANKW  = 8
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [BANKW-1:0]          wr_bank,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [OPW-1:0]            wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_act_addr,
  input  logic [$clog2(DEPTH)-1:0]  rd_wgt_addr,
  output logic [OPW-1:0]            rd_act,
  output logic [OPW-1:0]            rd_wgt [NUM_CE]
);
  logic [OPW-1:0] act_mem [DEPTH];
  logic [OPW-1:0] wgt_mem [NUM_CE][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_bank == '0) act_mem[wr_addr] <= wr_data;
    if (rd_en) rd_act <= act_mem[rd_act_addr];
  end

  for (genvar c = 0; c < NUM_CE; c++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BANKW'(c + 1)) wgt_mem[c][wr_addr] <= wr_data;
      if (rd_en) rd_wgt[c] <= wgt_mem[c][rd_wgt_addr];
    end
  end
endmodule
