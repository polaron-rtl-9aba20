// davinci_af: CORDIC-based activation-function unit (the "DA-VINCI AF" of the
// POLARON post-processing block).
//
// Supported functions (af input, polaron_pkg::af_e): none, ReLU, Sigmoid,
// Tanh, Swish, GELU, SeLU and SoftMax. Data are signed Q8.8.
// Every non-trivial function is reduced to one exponential and at most one
// division, both computed by CORDIC:
//   exp(t)    : t = q*ln2 + r with 0 <= r < ln2; e^r = cosh r + sinh r from a
//               hyperbolic CORDIC in rotation mode (18 iterations, 4 and 13
//               repeated, gain pre-compensated), then shifted by q
//   n / d     : linear CORDIC in vectoring mode (non-restoring, 18 steps)
//   sigmoid(x) = 1/(1+e^-x)            tanh(x) = 2/(1+e^-2x) - 1
//   swish(x)   = x*sigmoid(x)          gelu(x) ~= x*sigmoid(1.702x)
//   selu(x)    = 1.0507x (x>0), 1.7581(e^x - 1) (x<=0)
//   softmax    : two passes over a vector. Pass 0 (sm_pass=0, sm_clear on the
//                first element) adds e^x of every element into a sum register;
//                pass 1 outputs e^x / sum. The caller must keep e^x inside
//                the Q8.8 range (inputs below about 5.5).
// Internal arithmetic is Q16.16 (32/48-bit). Results saturate to Q8.8; ovf
// reports saturation.
// Timing: two register stages (exp, then divide/multiply): the output for an
// input with in_valid appears out_valid two cycles later, one input per cycle.
// The list of functions and the use of CORDIC follow the paper; the function
// identities, iteration counts and number formats are this design's choices.
module davinci_af
  import polaron_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_tag,      // passed through with the data
  input  af_e         af,
  input  logic        sm_pass,     // SoftMax: 0 = accumulate e^x, 1 = divide
  input  logic        sm_clear,    // SoftMax: clear the sum with this element
  input  logic signed [15:0] x,
  output logic        out_valid,
  output logic        out_tag,
  output logic signed [15:0] y,
  output logic        ovf
);
  localparam int NIT = 18;
  localparam int ITER_I [NIT] = '{1, 2, 3, 4, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 13, 14, 15, 16};
  localparam logic signed [31:0] ATANH [17] = '{0, 35999, 16739, 8235, 4101, 2049, 1024, 512,
                                                256, 128, 64, 32, 16, 8, 4, 2, 1};
  localparam logic signed [31:0] INV_K   = 79135;   // 1/K_hyp  (Q16)
  localparam logic signed [31:0] LN2     = 45426;   // ln 2     (Q16)
  localparam logic signed [31:0] INV_LN2 = 94548;   // 1/ln 2   (Q16)
  localparam logic signed [31:0] GELU_K  = 436;     // 1.702    (Q8)
  localparam logic signed [31:0] SELU_L  = 269;     // lambda   (Q8)
  localparam logic signed [31:0] SELU_LA = 450;     // lambda*alpha (Q8)
  localparam logic signed [47:0] EXP_MAX = 48'sd1 <<< 40;

  // e^t, t in Q16, result Q16 saturated to EXP_MAX
  function automatic logic signed [47:0] cordic_exp(input logic signed [31:0] t);
    logic signed [63:0] tq;
    logic signed [31:0] q, r, cx, cy, cz, nx, ny;
    logic signed [47:0] e;
    tq = 64'(t) * 64'(INV_LN2);
    q  = 32'(tq >>> 32);                 // floor(t / ln2)
    r  = t - q * LN2;                    // 0 <= r < ln2
    cx = INV_K; cy = 0; cz = r;
    for (int k = 0; k < NIT; k++) begin
      if (cz >= 0) begin
        nx = cx + (cy >>> ITER_I[k]); ny = cy + (cx >>> ITER_I[k]); cz = cz - ATANH[ITER_I[k]];
      end else begin
        nx = cx - (cy >>> ITER_I[k]); ny = cy - (cx >>> ITER_I[k]); cz = cz + ATANH[ITER_I[k]];
      end
      cx = nx; cy = ny;
    end
    e = 48'(cx + cy);                    // e^r in [1,2), Q16
    if (q >= 24)       e = EXP_MAX;
    else if (q <= -20) e = '0;
    else if (q >= 0)   e = e <<< q;
    else               e = e >>> (-q);
    return e;
  endfunction

  // n / d (Q16), requires 0 <= n < 2d, d > 0
  function automatic logic signed [31:0] cordic_div(input logic signed [47:0] n,
                                                    input logic signed [47:0] d);
    logic signed [47:0] cy;
    logic signed [31:0] z;
    cy = n; z = 0;
    for (int k = 0; k < NIT; k++) begin
      if (cy >= 0) begin cy = cy - (d >>> k); z = z + (32'sd65536 >>> k); end
      else         begin cy = cy + (d >>> k); z = z - (32'sd65536 >>> k); end
    end
    return z;
  endfunction

  // ------------------------------------------------------------ stage A
  logic               a_valid, a_tag, a_pass, a_clear;
  af_e                a_af;
  logic signed [15:0] a_x;
  logic signed [47:0] a_e;
  logic signed [31:0] targ;
  always_comb begin
    logic signed [31:0] xq;
    xq = 32'(x) <<< 8;                   // Q8.8 -> Q16
    case (af)
      AF_SIGMOID, AF_SWISH: targ = -xq;
      AF_TANH:              targ = -(xq <<< 1);
      AF_GELU:              targ = -((32'(x) * GELU_K));  // Q8*Q8 = Q16
      default:              targ = xq;                    // SeLU, SoftMax
    endcase
  end
  always_ff @(posedge clk) begin
    if (rst) a_valid <= 1'b0;
    else     a_valid <= in_valid;
    a_tag   <= in_tag;
    a_af    <= af;
    a_pass  <= sm_pass;
    a_clear <= sm_clear;
    a_x     <= x;
    a_e     <= cordic_exp(targ);
  end

  // ------------------------------------------------------------ stage B
  logic signed [47:0] sum;
  logic signed [47:0] yq;         // Q16 result before saturation
  always_comb begin
    logic signed [31:0] s;
    s  = cordic_div(48'sd65536, 48'sd65536 + a_e);   // 1/(1+E)
    yq = '0;
    case (a_af)
      AF_NONE:    yq = 48'(a_x) <<< 8;
      AF_RELU:    yq = a_x[15] ? '0 : (48'(a_x) <<< 8);
      AF_SIGMOID: yq = 48'(s);
      AF_TANH:    yq = (48'(s) <<< 1) - 48'sd65536;
      AF_SWISH,
      AF_GELU:    yq = (48'(a_x) * 48'(s)) >>> 8;
      AF_SELU:    yq = a_x[15] ? ((a_e - 48'sd65536) * 48'(SELU_LA)) >>> 8
                               : (48'(a_x) * 48'(SELU_L));
      default:    yq = a_pass ? 48'(cordic_div(a_e, (sum > 0) ? sum : 48'sd1)) : a_e;
    endcase
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      sum       <= '0;
      out_tag   <= 1'b0;
      y         <= '0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= a_valid;
      out_tag   <= a_tag;
      if (a_valid && a_af == AF_SOFTMAX && !a_pass)
        sum <= (a_clear ? '0 : sum) + a_e;
      if ((yq >>> 8) > 48'sd32767) begin
        y <= 16'sh7fff; ovf <= a_valid;
      end else if ((yq >>> 8) < -48'sd32768) begin
        y <= -16'sh8000; ovf <= a_valid;
      end else begin
        y <= 16'(yq >>> 8); ovf <= 1'b0;
      end
    end
  end
endmodule
