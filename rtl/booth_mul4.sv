// booth_mul4: one 4-bit x 4-bit unsigned multiplier built with radix-2 Booth
// recoding, the elementary unit of the PARV-CE SIMD multiplier array.
//
// The multiplier operand b is zero-extended to a 5-bit two's-complement word
// and recoded pairwise (b[i], b[i-1]) into digits {-1, 0, +1}; each digit adds,
// subtracts or skips a shifted copy of a. Operands are significand magnitudes
// (signs are handled separately by XOR), so both inputs are unsigned and the
// 8-bit product is exact. Purely combinational.
// The paper names radix-2 Booth 4-bit units; using them on unsigned magnitudes
// is this design's choice.
module booth_mul4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);
  logic [4:0] bx;
  logic signed [10:0] acc;
  always_comb begin
    bx  = {1'b0, b};
    acc = '0;
    for (int i = 0; i < 5; i++) begin
      logic prev;
      prev = (i == 0) ? 1'b0 : bx[i-1];
      case ({bx[i], prev})
        2'b01:   acc = acc + (11'(a) << i);
        2'b10:   acc = acc - (11'(a) << i);
        default: acc = acc;
      endcase
    end
    p = acc[7:0];
  end
endmodule
