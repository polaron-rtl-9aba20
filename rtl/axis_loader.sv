// axis_loader: AXI4-Stream slave that fills the feature memory.
//
// The host sets a target bank and start address (ld_set with ld_bank /
// ld_addr, written over AXI-Lite); each accepted beat (tvalid && tready)
// writes its 128-bit tdata to the next address of that bank. tlast ends the
// transfer and raises ld_done for one cycle; beats counts accepted beats.
// tready is held low while the engine is busy computing (hold = 1), so a
// transfer cannot overwrite operands in use: this is the stream's
// back-pressure.
// Timing: one beat per cycle, written the cycle it is accepted.
// The paper only names the stream path; this protocol is this design's choice.
module axis_loader
  import polaron_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned BANKW = 8
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      hold,
  input  logic                      ld_set,
  input  logic [BANKW-1:0]          ld_bank,
  input  logic [$clog2(DEPTH)-1:0]  ld_addr,
  input  logic [OPW-1:0]            s_axis_tdata,
  input  logic                      s_axis_tvalid,
  input  logic                      s_axis_tlast,
  output logic                      s_axis_tready,
  output logic                      wr_en,
  output logic [BANKW-1:0]          wr_bank,
  output logic [$clog2(DEPTH)-1:0]  wr_addr,
  output logic [OPW-1:0]            wr_data,
  output logic                      ld_done,
  output logic [15:0]               beats
);
  logic [BANKW-1:0]         bank_q;
  logic [$clog2(DEPTH)-1:0] addr_q;
  logic                     fire;

  assign s_axis_tready = !hold && !rst;
  assign fire    = s_axis_tvalid && s_axis_tready;
  assign wr_en   = fire;
  assign wr_bank = bank_q;
  assign wr_addr = addr_q;
  assign wr_data = s_axis_tdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      bank_q  <= '0;
      addr_q  <= '0;
      ld_done <= 1'b0;
      beats   <= '0;
    end else begin
      ld_done <= fire && s_axis_tlast;
      if (ld_set) begin
        bank_q <= ld_bank;
        addr_q <= ld_addr;
      end else if (fire) begin
        addr_q <= addr_q + 1'b1;
        beats  <= beats + 16'd1;
      end
    end
  end

  // AXI4-Stream rule: once valid, data stays stable until accepted
  property p_stable;
    @(posedge clk) disable iff (rst) (s_axis_tvalid && !s_axis_tready) |=> s_axis_tvalid;
  endproperty
  assert property (p_stable) else $error("axis_loader: tvalid dropped before tready");
endmodule
