// approx_lsp: approximate less significant part of the FAC imprecise adder.
//
// It replaces an accurate L-bit addition by much less logic:
//   * carry_o (the internal output T passed to the accurate part) is the AND
//     of the top input bits, A[L-1] & B[L-1]. This follows the source design.
//   * the top LOGIC_BITS sum bits (SUM[L-1] .. SUM[L-4] by default) are formed
//     by reduced logic from their own input bits;
//   * the remaining sum bits (SUM[L-5] .. SUM[0]) are constant 1. In a
//     standard-cell flow these map to tie-high cells.
// The exact reduced logic of the top four bits is not specified in a form that
// can be copied here. This design uses the simplest approximation of a
// half-sum that the FAC method itself gives as its example: the XOR of a bit
// pair is replaced by an OR, so SUM[i] = A[i] | B[i]. The result is too large
// by at most one unit in bit i when both inputs are 1. Swap the body of the
// reduced-logic loop to use another approximation.
//
// Interface: a_i, b_i are the low L operand bits; sum_o is B* (SUM[L-1:0]);
// carry_o is T. Purely combinational, no carry into this part.
module approx_lsp
#(
  parameter int unsigned L          = fac_pkg::APPROX_L,
  parameter int unsigned LOGIC_BITS = fac_pkg::APPROX_LOGIC_BITS
) (
  input  logic [L-1:0] a_i,
  input  logic [L-1:0] b_i,
  output logic [L-1:0] sum_o,
  output logic         carry_o
);

  initial begin
    assert (L >= 1 && LOGIC_BITS <= L)
      else $error("approx_lsp: need 1 <= L and LOGIC_BITS <= L");
  end

  assign carry_o = a_i[L-1] & b_i[L-1];

  always_comb begin
    for (int unsigned i = 0; i < L; i++) begin
      if (i >= L - LOGIC_BITS) sum_o[i] = a_i[i] | b_i[i];  // reduced logic
      else                     sum_o[i] = 1'b1;             // tie-high bits
    end
  end

endmodule
