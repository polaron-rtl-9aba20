// axil_regs: AXI4-Lite slave through which the host configures and monitors
// POLARON (32-bit data, 12-bit byte address, word accesses, wstrb ignored).
//
// Register map (byte offsets):
//   0x000 CTRL        W  bit0 = start a run of the workload
//   0x004 STATUS      R  bit0 busy, bit1 done (sticky until next start),
//                        bit2 overflow seen, bits[15:8] current layer
//   0x008 NUM_LAYERS  RW layers in the workload (workload configuration)
//   0x00C LOAD        RW bits[7:0] start address, bits[15:8] bank
//                        (0 = activations, c+1 = weights of CE c); a write
//                        points the stream loader there
//   0x010 OVF_COUNT   R  saturated results      0x014 ZSKIP_COUNT R
//   0x018 OUT_COUNT   R  emitted results        0x01C SKIPPED     R
//   0x020 PF_HITS     R  pre-fetch hits         0x024 BEATS       R
//   0x028 CYCLES      R  cycles of the last run 0x02C STALLS      R
//   0x030 MODE_SW     R  precision switches in the last run
//   0x100 + 16*L + 4*w   W  word w of the descriptor of layer L
// Handshake: a write is taken when awvalid and wvalid are both high and no
// response is pending (awready = wready = 1 in that cycle); bvalid is held
// until bready. A read is taken when arvalid is high and no read data is
// pending; rvalid is held until rready. Responses are always OKAY.
// The paper names AXI-Lite as the configuration path; the map is this
// design's choice.
module axil_regs
  import polaron_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 16
) (
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite
  input  logic [11:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [11:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // configuration outputs
  output logic                          start,
  output logic [$clog2(MAX_LAYERS):0]   num_layers,
  output logic                          ld_set,
  output logic [7:0]                    ld_bank,
  output logic [7:0]                    ld_addr,
  output logic                          desc_wr,
  output logic [$clog2(MAX_LAYERS)-1:0] desc_layer,
  output logic [1:0]                    desc_word,
  output logic [31:0]                   desc_data,
  // status inputs
  input  logic        busy,
  input  logic        done,
  input  logic        ovf,
  input  logic [7:0]  cur_layer,
  input  logic [15:0] ovf_count,
  input  logic [15:0] zskip_count,
  input  logic [15:0] out_count,
  input  logic [15:0] skipped,
  input  logic [15:0] pf_hits,
  input  logic [15:0] beats,
  input  logic [31:0] cycles,
  input  logic [15:0] stalls,
  input  logic [15:0] mode_sw
);
  logic wr_fire, rd_fire, done_q;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;

  assign desc_wr    = wr_fire && s_awaddr[11:8] == 4'h1;
  assign desc_layer = s_awaddr[4 +: $clog2(MAX_LAYERS)];
  assign desc_word  = s_awaddr[3:2];
  assign desc_data  = s_wdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid   <= 1'b0;
      s_rvalid   <= 1'b0;
      s_rdata    <= '0;
      start      <= 1'b0;
      ld_set     <= 1'b0;
      num_layers <= '0;
      ld_bank    <= '0;
      ld_addr    <= '0;
      done_q     <= 1'b0;
    end else begin
      start  <= 1'b0;
      ld_set <= 1'b0;
      if (done)  done_q <= 1'b1;
      if (start) done_q <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        case (s_awaddr)
          12'h000: start      <= s_wdata[0];
          12'h008: num_layers <= ($clog2(MAX_LAYERS)+1)'(s_wdata);
          12'h00C: begin
            ld_addr <= s_wdata[7:0];
            ld_bank <= s_wdata[15:8];
            ld_set  <= 1'b1;
          end
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        case (s_araddr)
          12'h004: s_rdata <= {16'd0, cur_layer, 5'd0, ovf, done_q, busy};
          12'h008: s_rdata <= 32'(num_layers);
          12'h00C: s_rdata <= {16'd0, ld_bank, ld_addr};
          12'h010: s_rdata <= 32'(ovf_count);
          12'h014: s_rdata <= 32'(zskip_count);
          12'h018: s_rdata <= 32'(out_count);
          12'h01C: s_rdata <= 32'(skipped);
          12'h020: s_rdata <= 32'(pf_hits);
          12'h024: s_rdata <= 32'(beats);
          12'h028: s_rdata <= cycles;
          12'h02C: s_rdata <= 32'(stalls);
          12'h030: s_rdata <= 32'(mode_sw);
          default: s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays valid until it is accepted
  assert property (@(posedge clk) disable iff (rst) (s_bvalid && !s_bready) |=> s_bvalid)
    else $error("axil_regs: bvalid dropped");
  assert property (@(posedge clk) disable iff (rst) (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata)))
    else $error("axil_regs: rvalid/rdata changed before rready");
endmodule
