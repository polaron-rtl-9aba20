// control_engine: runtime control engine of POLARON. Sequences a workload of
// num_layers layers, each a matrix-vector product of k_len 128-bit vectors
// computed by the shared MAC bank, followed by post-processing of the NUM_CE
// results and their output on the stream.
//
// States: IDLE -> FETCH (wait for the pre-fetched descriptor; a descriptor
// with skip set is passed over: early exit) -> ISSUE (read one activation and
// NUM_CE weight vectors per cycle from the feature memory and feed the MAC
// bank the next cycle, first/last marking the dot product) -> WAITMAC (until
// the bank's results are captured) -> POST (send result 0..NUM_CE-1 to
// post-processing; SoftMax layers run this twice, pass 0 building the sum of
// exponentials, pass 1 emitting) -> DRAIN (until all outputs are in the
// egress FIFO) -> next layer, or FINISH (done pulse) after the last.
// The precision mode of the MAC bank and post-processing comes from the
// current descriptor, so the precision changes at every layer boundary.
// Flow control: an item enters post-processing only if the egress FIFO plus
// the items in flight leave room for it; cycles lost this way are counted in
// stall_count. busy holds the stream loader off during a run.
// The paper names the control engine and its role; the state machine is this
// design's choice.
module control_engine
  import polaron_pkg::*;
#(
  parameter int unsigned NUM_CE     = 64,
  parameter int unsigned DEPTH      = 256,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // pre-fetcher
  input  layer_desc_t                cur_desc,
  input  logic                       cur_valid,
  input  logic                       done_all,
  output logic                       advance,
  // feature memory read
  output logic                       rd_en,
  output logic [$clog2(DEPTH)-1:0]   rd_act_addr,
  output logic [$clog2(DEPTH)-1:0]   rd_wgt_addr,
  // MAC bank
  output logic                       mac_valid,
  output logic                       mac_first,
  output logic                       mac_last,
  input  logic                       res_valid,
  output logic [$clog2(NUM_CE)-1:0]  res_idx,
  // post-processing
  output logic                       pp_valid,
  output logic                       pp_emit,
  output logic                       sm_pass,
  output logic                       sm_clear,
  input  logic [2:0]                 pp_inflight,
  input  logic                       pp_out_valid,
  // egress
  input  logic [$clog2(FIFO_DEPTH):0] fifo_count,
  output logic                       out_last,
  // statistics
  output logic [15:0]                skipped_layers,
  output logic [15:0]                stall_count,
  output logic [15:0]                mode_switches,
  output logic [31:0]                run_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_ISSUE, S_WAITMAC, S_POST, S_DRAIN, S_FINISH} state_e;
  state_e state;

  logic [$clog2(DEPTH)-1:0]  k;
  logic [$clog2(NUM_CE)-1:0] idx;
  logic [$clog2(NUM_CE):0]   emitted;
  logic                      pass;
  logic                      credit;
  logic [$clog2(DEPTH)-1:0]  klen_m1;
  mode_e                     last_mode;
  logic                      have_mode;

  assign klen_m1 = (cur_desc.k_len == '0) ? '0 : cur_desc.k_len - 1'b1;
  assign credit  = (32'(fifo_count) + 32'(pp_inflight)) < FIFO_DEPTH;

  assign busy        = (state != S_IDLE);
  assign rd_en       = (state == S_ISSUE);
  assign rd_act_addr = cur_desc.act_base + k;
  assign rd_wgt_addr = cur_desc.wgt_base + k;
  assign advance     = (state == S_FETCH && cur_valid && !done_all && cur_desc.skip) ||
                       (state == S_DRAIN && pp_inflight == '0 && !pp_valid &&
                        emitted == ($clog2(NUM_CE)+1)'(NUM_CE));
  assign pp_valid    = (state == S_POST) && credit;
  assign pp_emit     = pass;
  assign sm_pass     = pass;
  assign sm_clear    = (idx == '0);
  assign res_idx     = idx;
  assign out_last    = pp_out_valid && (emitted == ($clog2(NUM_CE)+1)'(NUM_CE - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= S_IDLE;
      done           <= 1'b0;
      k              <= '0;
      idx            <= '0;
      pass           <= 1'b0;
      emitted        <= '0;
      mac_valid      <= 1'b0;
      mac_first      <= 1'b0;
      mac_last       <= 1'b0;
      skipped_layers <= '0;
      stall_count    <= '0;
      mode_switches  <= '0;
      run_cycles     <= '0;
      have_mode      <= 1'b0;
      last_mode      <= MODE_FXP4;
    end else begin
      done      <= 1'b0;
      mac_valid <= rd_en;
      mac_first <= rd_en && (k == '0);
      mac_last  <= rd_en && (k == klen_m1);
      if (busy) run_cycles <= run_cycles + 1;
      if (pp_out_valid) emitted <= emitted + 1'b1;
      case (state)
        S_IDLE:
          if (start) begin
            state          <= S_FETCH;
            run_cycles     <= '0;
            skipped_layers <= '0;
            stall_count    <= '0;
            mode_switches  <= '0;
            have_mode      <= 1'b0;
          end
        S_FETCH:
          if (done_all) state <= S_FINISH;
          else if (cur_valid) begin
            if (cur_desc.skip) skipped_layers <= skipped_layers + 1'b1;
            else begin
              k     <= '0;
              state <= S_ISSUE;
              if (have_mode && last_mode != cur_desc.mode) mode_switches <= mode_switches + 1'b1;
              last_mode <= cur_desc.mode;
              have_mode <= 1'b1;
            end
          end
        S_ISSUE: begin
          k <= k + 1'b1;
          if (k == klen_m1) state <= S_WAITMAC;
        end
        S_WAITMAC:
          if (res_valid) begin
            state   <= S_POST;
            idx     <= '0;
            emitted <= '0;
            pass    <= (cur_desc.af != AF_SOFTMAX);
          end
        S_POST: begin
          if (!credit) stall_count <= stall_count + 1'b1;
          else begin
            idx <= idx + 1'b1;
            if (idx == ($clog2(NUM_CE))'(NUM_CE - 1)) begin
              if (!pass) pass  <= 1'b1;
              else       state <= S_DRAIN;
            end
          end
        end
        S_DRAIN:
          if (advance) state <= S_FETCH;
        S_FINISH: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
