// simd_mul_array: runtime-reconfigurable significand multiplier of PARV-CE
// (pipeline stage II, "Mantissa Multiplication").
//
// Sixteen booth_mul4 units are shared by all precisions:
//   MUL4  : 16 independent 4x4 products (Var-FxP4, Var-FP8)
//   MUL8  : 4 lanes, each 8x8 assembled from 4 units (Var-FxP8, Posit8, BF16)
//   MUL16 : 1 lane, 16x16 assembled from all 16 units (Var-FxP16, FP16, Posit16)
// Unit u = 4*L + 2*i + j of a MUL8 lane L multiplies nibble i of a by nibble j
// of b; in MUL16 unit u = 4*i + j multiplies nibble i of a by nibble j of b,
// and the sub-products are summed with shifts of 4*(i+j). Lanes that a mode
// does not use read as zero. Combinational.
// The 16-unit count and the 16/4/1 lane plan follow the paper; the nibble
// assignment of units is this design's choice.
module simd_mul_array
  import polaron_pkg::*;
(
  input  mulw_e                 mulw,
  input  logic [SIGW-1:0]       a_sig [LANES],
  input  logic [SIGW-1:0]       b_sig [LANES],
  output logic [PRODW-1:0]      prod  [LANES]
);
  logic [3:0] ua [LANES];
  logic [3:0] ub [LANES];
  logic [7:0] up [LANES];

  for (genvar u = 0; u < LANES; u++) begin : g_unit
    booth_mul4 u_mul (.a(ua[u]), .b(ub[u]), .p(up[u]));
  end

  always_comb begin
    for (int u = 0; u < LANES; u++) begin
      ua[u] = '0;
      ub[u] = '0;
      prod[u] = '0;
    end
    case (mulw)
      MUL4: begin
        for (int u = 0; u < LANES; u++) begin
          ua[u] = a_sig[u][3:0];
          ub[u] = b_sig[u][3:0];
          prod[u] = PRODW'(up[u]);
        end
      end
      MUL8: begin
        for (int l = 0; l < 4; l++) begin
          for (int i = 0; i < 2; i++) begin
            for (int j = 0; j < 2; j++) begin
              ua[4*l+2*i+j] = a_sig[l][4*i +: 4];
              ub[4*l+2*i+j] = b_sig[l][4*j +: 4];
            end
          end
          for (int i = 0; i < 2; i++)
            for (int j = 0; j < 2; j++)
              prod[l] = prod[l] + (PRODW'(up[4*l+2*i+j]) << (4*(i+j)));
        end
      end
      default: begin
        for (int i = 0; i < 4; i++) begin
          for (int j = 0; j < 4; j++) begin
            ua[4*i+j] = a_sig[0][4*i +: 4];
            ub[4*i+j] = b_sig[0][4*j +: 4];
          end
        end
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            prod[0] = prod[0] + (PRODW'(up[4*i+j]) << (4*(i+j)));
      end
    endcase
  end
endmodule
