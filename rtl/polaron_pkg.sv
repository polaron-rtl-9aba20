// polaron_pkg: types and constants shared by the POLARON accelerator and its
// PARV-CE multi-precision MAC element.
//
// The 3-bit precision mode codes 000..110 are the ones printed next to the
// PARV-CE mode input (Var-FxP4, Var-FP8, Var-FxP8, Posit8, BF16, FP16,
// Posit16). Var-FxP16 is supported by the engine but has no printed code; this
// design gives it the free code 3'b111. The "variant" bit chooses between the
// two layouts of the Var-FP formats (FP8: E4M3 / E5M2, FP16: E5M10 / E6M9).
// Posit exponent sizes (es=0 for Posit8, es=1 for Posit16) are this design's
// choice: they make the Posit8 significand need the 8-bit multiplier and the
// Posit16 significand the 16-bit one, as the SIMD lane plan requires.
package polaron_pkg;

  // ---------------------------------------------------------------- modes
  typedef enum logic [2:0] {
    MODE_FXP4    = 3'b000,
    MODE_FP8     = 3'b001,
    MODE_FXP8    = 3'b010,
    MODE_POSIT8  = 3'b011,
    MODE_BF16    = 3'b100,
    MODE_FP16    = 3'b101,
    MODE_POSIT16 = 3'b110,
    MODE_FXP16   = 3'b111
  } mode_e;

  localparam int unsigned LANES     = 16;   // 16x 4-bit multipliers
  localparam int unsigned OPW       = 128;  // A / B operand width
  localparam int unsigned SIGW      = 16;   // per-lane significand field
  localparam int unsigned EXPW      = 12;   // signed exponent width (product LSB weight)
  localparam int unsigned PRODW     = 32;   // per-lane product magnitude
  localparam int unsigned GUARD     = 16;   // extra alignment bits below the largest product
  localparam int unsigned ALW       = PRODW + GUARD + 8; // signed aligned-term width (56)
  localparam int unsigned ACCW      = 64;   // accumulator width
  localparam int unsigned POSIT8_ES  = 0;
  localparam int unsigned POSIT16_ES = 1;

  // Lane geometry for a mode: number of active lanes and lane element width.
  function automatic int unsigned mode_lanes(mode_e m);
    case (m)
      MODE_FXP4, MODE_FP8:                mode_lanes = 16;
      MODE_FXP8, MODE_POSIT8, MODE_BF16:  mode_lanes = 4;
      default:                            mode_lanes = 1;
    endcase
  endfunction

  function automatic int unsigned mode_elem_bits(mode_e m);
    case (m)
      MODE_FXP4:                                   mode_elem_bits = 4;
      MODE_FP8, MODE_FXP8, MODE_POSIT8:            mode_elem_bits = 8;
      default:                                     mode_elem_bits = 16;
    endcase
  endfunction

  // Multiplier granularity (4, 8 or 16 bit significand products).
  typedef enum logic [1:0] {MUL4 = 2'd0, MUL8 = 2'd1, MUL16 = 2'd2} mulw_e;

  function automatic mulw_e mode_mulw(mode_e m);
    case (m)
      MODE_FXP4, MODE_FP8:                mode_mulw = MUL4;
      MODE_FXP8, MODE_POSIT8, MODE_BF16:  mode_mulw = MUL8;
      default:                            mode_mulw = MUL16;
    endcase
  endfunction

  function automatic logic mode_is_fxp(mode_e m);
    mode_is_fxp = (m == MODE_FXP4) || (m == MODE_FXP8) || (m == MODE_FXP16);
  endfunction

  // Unpacked operand: value = (-1)^sign * sig * 2^exp
  typedef struct packed {
    logic                   sign;
    logic                   zero;
    logic signed [EXPW-1:0] exp;
    logic [SIGW-1:0]        sig;
  } unpacked_t;

  // One lane product: value = (-1)^sign * mag * 2^exp
  typedef struct packed {
    logic                   sign;
    logic                   zero;
    logic signed [EXPW-1:0] exp;
    logic [PRODW-1:0]       mag;
  } product_t;

  // ----------------------------------------------------- activation codes
  typedef enum logic [2:0] {
    AF_NONE    = 3'd0,
    AF_RELU    = 3'd1,
    AF_SIGMOID = 3'd2,
    AF_TANH    = 3'd3,
    AF_SWISH   = 3'd4,
    AF_GELU    = 3'd5,
    AF_SELU    = 3'd6,
    AF_SOFTMAX = 3'd7
  } af_e;

  // Post-processing fixed-point format: signed Q8.8 in 16 bits.
  localparam int unsigned PP_FRAC = 8;

  // ------------------------------------------------------ layer descriptor
  localparam int unsigned ADDRW = 8;  // feature-memory word address width

  // One layer of the workload (written by the host as four 32-bit words).
  typedef struct packed {
    logic [15:0]      bias;       // word 3 [31:16]  Q8.8 bias after scaling
    logic [15:0]      scale;      // word 3 [15:0]   Q8.8 signed scale
    logic [7:0]       rsvd2;      // word 2 [31:24]
    logic [3:0]       pp_shift;   // word 2 [23:20]  extra right shift after scaling
    logic [3:0]       rsvd1;      // word 2 [19:16]
    logic [ADDRW-1:0] k_len;      // word 2 [15:8]   number of 128-bit vectors per dot product
    logic [ADDRW-1:0] wgt_base;   // word 2 [7:0]    weight-bank start address
    logic [ADDRW-1:0] act_base;   // word 1 [31:24]  activation-bank start address
    logic [4:0]       out_shift;  // word 1 [23:19]  fixed-point output right shift in the CE
    logic [2:0]       rsvd0;      // word 1 [18:16]
    logic [15:0]      rsvd3;      // word 1 [15:0]
    logic [15:0]      rsvd4;      // word 0 [31:16]
    logic [7:0]       rsvd5;      // word 0 [15:8]
    logic             skip;       // word 0 [7]      early exit: skip this layer
    af_e              af;         // word 0 [6:4]
    logic             variant;    // word 0 [3]
    mode_e            mode;       // word 0 [2:0]
  } layer_desc_t;

endpackage
