// csa42: word-level 4:2 carry-save compressor. Four W-bit two's-complement
// addends are reduced to a sum word and a carry word (already shifted left by
// one) whose modulo-2^W sum equals the sum of the inputs. Built from two rows
// of full adders (3:2 counters). Combinational.
// The 4:2 carry-save compressor is the one the published CE uses in its adder
// tree; building it from two 3:2 full-adder rows is this design's choice.
module csa42 #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  input  logic [W-1:0] x2,
  input  logic [W-1:0] x3,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] s1, c1, c1s, c2;
  always_comb begin
    s1    = x0 ^ x1 ^ x2;
    c1    = (x0 & x1) | (x0 & x2) | (x1 & x2);
    c1s   = {c1[W-2:0], 1'b0};
    sum   = s1 ^ c1s ^ x3;
    c2    = (s1 & c1s) | (s1 & x3) | (c1s & x3);
    carry = {c2[W-2:0], 1'b0};
  end
endmodule
