// post_proc: POLARON post-processing block. Normalization -> Scale & Shift ->
// DA-VINCI activation, plus the overflow and dataflow flags.
//
// Each input (one CE result with the layer's mode and parameters) is converted
// to Q8.8 (pp_normalize), re-scaled (pp_scale_shift), registered, and passed
// through davinci_af. in_emit = 0 marks SoftMax first-pass items whose output
// is not forwarded (they only feed the SoftMax sum).
// Flags: ovf_sticky (any saturation in normalize, scale or AF since clear),
// ovf_count, out_count, and inflight (items inside the block), used by the
// control engine for flow control.
// Timing: 3 register stages; one item per cycle; out_valid three cycles after
// in_valid for emitted items. Synchronous active-high reset; flag_clear
// clears the counters.
// The chain normalization -> scale & shift -> activation and the overflow
// flags follow the published post-processing block; the Q8.8 format and
// pipeline split are this design's choices.
module post_proc
  import polaron_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        flag_clear,
  input  logic        in_valid,
  input  logic        in_emit,
  input  logic [15:0] in_code,
  input  mode_e       mode,
  input  logic        variant,
  input  af_e         af,
  input  logic        sm_pass,
  input  logic        sm_clear,
  input  logic signed [15:0] scale,
  input  logic [3:0]  pp_shift,
  input  logic signed [15:0] bias,
  output logic        out_valid,
  output logic signed [15:0] out_data,
  output logic        ovf_sticky,
  output logic [15:0] ovf_count,
  output logic [15:0] out_count,
  output logic [2:0]  inflight
);
  logic signed [15:0] nq, sq;
  logic               n_sat, s_sat;
  pp_normalize   u_norm (.mode(mode), .variant(variant), .code(in_code), .q88(nq), .sat(n_sat));
  pp_scale_shift u_ss   (.x(nq), .scale(scale), .pp_shift(pp_shift), .bias(bias), .y(sq), .sat(s_sat));

  logic               r_valid, r_emit, r_sat, r_pass, r_clear;
  af_e                r_af;
  logic signed [15:0] r_x;
  always_ff @(posedge clk) begin
    if (rst) r_valid <= 1'b0;
    else     r_valid <= in_valid;
    r_emit  <= in_emit;
    r_sat   <= in_valid && (n_sat || s_sat);
    r_pass  <= sm_pass;
    r_clear <= sm_clear;
    r_af    <= af;
    r_x     <= sq;
  end

  logic a_valid, a_emit, a_ovf;
  logic signed [15:0] a_y;
  davinci_af u_af (.clk(clk), .rst(rst), .in_valid(r_valid), .in_tag(r_emit), .af(r_af),
                   .sm_pass(r_pass), .sm_clear(r_clear), .x(r_x),
                   .out_valid(a_valid), .out_tag(a_emit), .y(a_y), .ovf(a_ovf));

  // saturation seen in the first stage, delayed to line up with the AF output
  logic sat_d1, sat_d2;
  always_ff @(posedge clk) begin
    sat_d1 <= r_valid && r_sat;
    sat_d2 <= sat_d1;
  end

  assign out_valid = a_valid && a_emit;
  assign out_data  = a_y;

  always_ff @(posedge clk) begin
    if (rst || flag_clear) begin
      ovf_sticky <= 1'b0;
      ovf_count  <= '0;
      out_count  <= '0;
    end else begin
      if (a_valid && (a_ovf || sat_d2)) begin
        ovf_sticky <= 1'b1;
        ovf_count  <= ovf_count + 16'd1;
      end
      if (out_valid) out_count <= out_count + 16'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) inflight <= '0;
    else     inflight <= inflight + 3'(in_valid) - 3'(a_valid);
  end
endmodule
