// isa_prefetcher: data and control "ISA" pre-fetcher. Keeps the descriptor of
// the layer being executed (cur_desc) and fetches the next layer's descriptor
// from layer_cfg_table while the current one runs, so that the control
// engine can switch precision mode and parameters at a layer boundary
// without waiting for the table.
// start resets the layer index to 0; advance moves to the next layer. After
// an advance cur_valid is high the next cycle if the next descriptor was
// already prefetched or arrives in that same cycle (counted in hits: the
// engine did not wait), else once it has been read.
// done_all is high when every one of num_layers layers has been advanced past.
// Timing: table read latency one cycle; at most one read in flight.
// The paper names the pre-fetcher and its purpose; the two-entry scheme is
// this design's choice.
module isa_prefetcher
  import polaron_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 16
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  input  logic                          advance,
  input  logic [$clog2(MAX_LAYERS):0]   num_layers,
  output logic                          rd_en,
  output logic [$clog2(MAX_LAYERS)-1:0] rd_layer,
  input  layer_desc_t                   rd_desc,
  output layer_desc_t                   cur_desc,
  output logic                          cur_valid,
  output logic [$clog2(MAX_LAYERS):0]   cur_idx,
  output logic                          done_all,
  output logic [15:0]                   hits
);
  localparam int unsigned IW = $clog2(MAX_LAYERS) + 1;
  layer_desc_t   nxt_desc;
  logic          nxt_valid, pending;
  logic [IW-1:0] fetch_idx, pend_idx, cur_idx_n;

  assign done_all  = (cur_idx >= num_layers);
  assign cur_idx_n = advance ? cur_idx + 1'b1 : cur_idx;
  assign rd_en     = !start && !pending && (fetch_idx < num_layers) && (fetch_idx <= cur_idx + 1'b1);
  assign rd_layer  = fetch_idx[IW-2:0];

  always_ff @(posedge clk) begin
    if (rst || start) begin
      cur_idx   <= '0;
      cur_valid <= 1'b0;
      nxt_valid <= 1'b0;
      fetch_idx <= '0;
      pending   <= 1'b0;
      pend_idx  <= '0;
      if (rst) hits <= '0;
    end else begin
      cur_idx <= cur_idx_n;
      if (advance) begin
        cur_valid <= nxt_valid;
        if (nxt_valid) begin
          cur_desc <= nxt_desc;
          hits     <= hits + 16'd1;
        end
        nxt_valid <= 1'b0;
      end
      pending <= rd_en;
      if (rd_en) begin
        pend_idx  <= fetch_idx;
        fetch_idx <= fetch_idx + 1'b1;
      end
      if (pending) begin
        if (pend_idx == cur_idx_n) begin
          cur_desc  <= rd_desc;
          cur_valid <= 1'b1;
          if (advance) hits <= hits + 16'd1;  // arrived just in time
        end else begin
          nxt_desc  <= rd_desc;
          nxt_valid <= 1'b1;
        end
      end
    end
  end
endmodule
