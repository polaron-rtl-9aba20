// axis_egress: result FIFO and AXI4-Stream master of the POLARON output.
//
// Post-processed 16-bit results (push, data, last) enter a DEPTH-entry FIFO
// and leave on m_axis (tdata, tlast) under the usual valid/ready handshake,
// so a slow consumer (tready low) only fills the FIFO; count tells the
// control engine how much room is left, and the engine stops issuing work
// before the FIFO overflows (a stall). Pushing into a full FIFO is an error
// and is asserted against.
// Timing: first-word fall-through; a pushed word can leave the next cycle.
// The FIFO and its depth are this design's choice.
module axis_egress #(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push,
  input  logic [15:0]              push_data,
  input  logic                     push_last,
  output logic [$clog2(DEPTH):0]   count,
  output logic [15:0]              m_axis_tdata,
  output logic                     m_axis_tvalid,
  output logic                     m_axis_tlast,
  input  logic                     m_axis_tready
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [16:0]   mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          pop;

  assign m_axis_tvalid = (count != '0);
  assign {m_axis_tlast, m_axis_tdata} = mem[rp];
  assign pop = m_axis_tvalid && m_axis_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= {push_last, push_data};
        wp      <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(push && count == ($clog2(DEPTH)+1)'(DEPTH) && !pop))
    else $error("axis_egress: push into full FIFO");
  assert property (@(posedge clk) disable iff (rst) (m_axis_tvalid && !m_axis_tready) |=> m_axis_tvalid)
    else $error("axis_egress: tvalid dropped before tready");
endmodule
