// fac_processing_unit: one processing unit of the FAC adder, the N-bit
// imprecise adder.
//
// The operands are split at bit L. The upper N-L bits go to an accurate
// carry-lookahead adder (the significant part); the lower L bits go to the
// approximate less significant part. The only connection between the two is
// the carry input T that the approximate part hands to the accurate part
// (T = A[L-1] & B[L-1]), so the accurate part never waits for the low bits and
// the critical path is that of the (N-L)-bit CLA alone. This split and the
// T link follow the source design.
//
// Interface: a_i, b_i are the N-bit operands. sig_o is output A of the
// processing unit, the accurate sum bits SUM[N:L] (N-L+1 bits, carry out on
// top). lsp_o is output B*, the approximate sum bits SUM[L-1:0].
// Purely combinational.
module fac_processing_unit
#(
  parameter int unsigned N = fac_pkg::ADDER_N,
  parameter int unsigned L = fac_pkg::APPROX_L
) (
  input  logic [N-1:0] a_i,
  input  logic [N-1:0] b_i,
  output logic [N-L:0] sig_o,
  output logic [L-1:0] lsp_o
);

  logic carry_t;  // intermediate output T, approximate -> accurate part

  approx_lsp #(
    .L (L)
  ) u_lsp (
    .a_i     (a_i[L-1:0]),
    .b_i     (b_i[L-1:0]),
    .sum_o   (lsp_o),
    .carry_o (carry_t)
  );

  cla_adder #(
    .WIDTH (N - L)
  ) u_sig (
    .a_i   (a_i[N-1:L]),
    .b_i   (b_i[N-1:L]),
    .cin_i (carry_t),
    .sum_o (sig_o)
  );

endmodule
