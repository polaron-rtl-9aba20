// parv_accum: PARV-CE pipeline stage IV, second accumulation stage and the
// accumulator register.
//
// The four carry-save words from stage III pass one more 4:2 compressor and a
// carry-select adder, giving the partial dot product P of this cycle with
// weight 2^(e_p - GUARD). P is then added into the accumulator (acc_m, acc_e):
// the operand with the smaller exponent is shifted right (arithmetic) to the
// larger one, in block-floating-point fashion; in the fixed-point modes all
// exponents are 0 and the sum is exact. in_first starts a new dot product
// (the accumulator is loaded with P). When every lane of a cycle was zero the
// update is skipped (zero-skip) and skip_o is raised for that item.
// acc_ovf flags a signed overflow of the accumulator add.
// Timing: one register stage; the accumulator value for an input is valid the
// cycle after in_valid. Synchronous active-high reset.
// The CSA + CSLA split follows the paper; block-floating accumulation and the
// zero-skip rule are this design's reading of it.
module parv_accum
  import polaron_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_all_zero,
  input  logic signed [EXPW-1:0] in_e,
  input  logic [ALW-1:0]         in_w [4],
  output logic signed [ACCW-1:0] acc_m,
  output logic signed [EXPW-1:0] acc_e,
  output logic                   valid_o,
  output logic                   skip_o,
  output logic                   acc_ovf
);
  logic [ALW-1:0] s, c, p;
  csa42    #(.W(ALW))          u_csa  (.x0(in_w[0]), .x1(in_w[1]), .x2(in_w[2]), .x3(in_w[3]),
                                       .sum(s), .carry(c));
  csla_add #(.W(ALW), .BLK(8)) u_csla (.a(s), .b(c), .s(p));

  logic signed [ACCW-1:0] pe, a_al, p_al, sum;
  logic signed [EXPW-1:0] e_new;
  logic                   ovf;

  always_comb begin
    int d;
    d     = 0;
    pe    = ACCW'($signed(p));
    e_new = in_e;
    a_al  = acc_m;
    p_al  = pe;
    if (acc_m == '0) begin
      a_al  = '0;
    end else if (acc_e > in_e) begin
      e_new = acc_e;
      d     = int'(acc_e) - int'(in_e);
      p_al  = (d >= int'(ACCW)) ? (pe >>> (ACCW - 1)) : (pe >>> d);
    end else begin
      d     = int'(in_e) - int'(acc_e);
      a_al  = (d >= int'(ACCW)) ? (acc_m >>> (ACCW - 1)) : (acc_m >>> d);
    end
    sum = a_al + p_al;
    ovf = (a_al[ACCW-1] == p_al[ACCW-1]) && (sum[ACCW-1] != a_al[ACCW-1]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_m   <= '0;
      acc_e   <= '0;
      valid_o <= 1'b0;
      skip_o  <= 1'b0;
      acc_ovf <= 1'b0;
    end else begin
      valid_o <= in_valid;
      skip_o  <= in_valid && in_all_zero;
      acc_ovf <= 1'b0;
      if (in_valid) begin
        if (in_first) begin
          acc_m <= in_all_zero ? '0 : pe;
          acc_e <= in_all_zero ? '0 : in_e;
        end else if (!in_all_zero) begin
          acc_m   <= sum;
          acc_e   <= e_new;
          acc_ovf <= ovf;
        end
      end
    end
  end
endmodule
