// pp_scale_shift: per-layer affine re-scaling of a Q8.8 value,
//   y = sat16( ((x * scale) >>> (8 + pp_shift)) + bias )
// with scale and bias signed Q8.8 and pp_shift 0..15 (a power-of-two
// re-quantisation step). Used to fold batch-norm / quantisation scale factors
// into the output. sat reports saturation (overflow detection). The shift is
// arithmetic (rounds toward -inf). Combinational.
// The paper names "scale & shift"; this formula is this design's choice.
module pp_scale_shift (
  input  logic signed [15:0] x,
  input  logic signed [15:0] scale,
  input  logic [3:0]         pp_shift,
  input  logic signed [15:0] bias,
  output logic signed [15:0] y,
  output logic               sat
);
  always_comb begin
    logic signed [31:0] p;
    logic signed [32:0] r;
    p = 32'(x) * 32'(scale);
    r = 33'(p >>> (8 + pp_shift)) + 33'(bias);
    sat = 1'b0;
    if (r > 33'sd32767)       begin y = 16'sh7fff;  sat = 1'b1; end
    else if (r < -33'sd32768) begin y = -16'sh8000; sat = 1'b1; end
    else                      y = 16'(r);
  end
endmodule
