// layer_cfg_table: the layer-adaptive precision subset / workload
// configuration store. Holds one 128-bit layer descriptor
// (polaron_pkg::layer_desc_t: precision mode and variant, activation, scale,
// bias, shifts, operand addresses, vector count, skip flag) per layer of the
// workload, for up to MAX_LAYERS layers.
// The host writes descriptors 32 bits at a time (wr_layer, wr_word 0..3);
// the ISA pre-fetcher reads whole descriptors.
// Timing: synchronous read, descriptor valid the cycle after rd_en.
// The per-layer precision table follows the paper's layer-adaptive precision
// subset; the descriptor fields and MAX_LAYERS are this design's choices.
module layer_cfg_table
  import polaron_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 16
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(MAX_LAYERS)-1:0] wr_layer,
  input  logic [1:0]                    wr_word,
  input  logic [31:0]                   wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(MAX_LAYERS)-1:0] rd_layer,
  output layer_desc_t                   rd_desc
);
  logic [31:0] mem [MAX_LAYERS][4];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_layer][wr_word] <= wr_data;
    if (rd_en) rd_desc <= layer_desc_t'({mem[rd_layer][3], mem[rd_layer][2],
                                         mem[rd_layer][1], mem[rd_layer][0]});
  end
endmodule
