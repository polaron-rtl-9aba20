// csla_add: carry-select adder. The W-bit addition is cut into BLK-bit blocks;
// every block above the first computes its sum for carry-in 0 and 1 in
// parallel and the carry rippling from the block below selects one. Result is
// modulo 2^W. Combinational. Used as the final adder of PARV-CE stage IV.
// The published CE finishes its sum with a carry-select adder; the block size
// is this design's choice.
module csla_add #(
  parameter int unsigned W   = 16,
  parameter int unsigned BLK = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);
  localparam int unsigned NB = (W + BLK - 1) / BLK;
  logic [NB*BLK-1:0] ax, bx, sx;
  always_comb begin
    logic c;
    logic [BLK:0] s0, s1;
    ax = (NB*BLK)'(a);
    bx = (NB*BLK)'(b);
    c  = 1'b0;
    sx = '0;
    for (int k = 0; k < NB; k++) begin
      s0 = {1'b0, ax[k*BLK +: BLK]} + {1'b0, bx[k*BLK +: BLK]};
      s1 = {1'b0, ax[k*BLK +: BLK]} + {1'b0, bx[k*BLK +: BLK]} + (BLK+1)'(1);
      sx[k*BLK +: BLK] = c ? s1[BLK-1:0] : s0[BLK-1:0];
      c = c ? s1[BLK] : s0[BLK];
    end
    s = sx[W-1:0];
  end
endmodule
