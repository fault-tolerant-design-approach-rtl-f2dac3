// fac_adder: 3-tuple FAC (fault-tolerant design based on approximate
// computing) adder, the top of this design.
//
// Idea: triple modular redundancy (TMR) masks any single fault by running three
// identical units and voting their outputs, but triples the cost. FAC keeps the
// three-way redundancy and the voting, so it masks any single fault or any one
// faulty unit just as TMR does, but makes every unit cheaper: each unit's low,
// less significant output bits come from an approximate circuit. For
// error-tolerant data (images, signals) the small error in the low bits is
// acceptable.
//
// Structure: COPIES identical fac_processing_unit instances receive the same
// operands. Majority voter 1 votes their significant outputs A (SUM[N:L]) into
// V1; majority voter 2 votes their approximate outputs B* (SUM[L-1:0]) into
// V2*. The final sum is {V1, V2*}. This follows the source design; COPIES may
// be raised to 5 or 7 for the higher-order variants it mentions.
//
// Interface: a_i, b_i are the N-bit operands; sum_o is the N+1-bit sum; v1_o
// and v2_o are its two voted fields. Purely combinational: a new operand pair
// can be applied every cycle of whatever clock surrounds it. The constant
// low sum bits of the approximate part make v2_o[L-5:0] (and the same bits of
// sum_o) constant 1 by design. Because the units are identical, a synthesis
// flow must keep their hierarchy apart or it will merge them into one.
module fac_adder
#(
  parameter int unsigned N      = fac_pkg::ADDER_N,
  parameter int unsigned L      = fac_pkg::APPROX_L,
  parameter int unsigned COPIES = fac_pkg::FAC_COPIES
) (
  input  logic [N-1:0] a_i,
  input  logic [N-1:0] b_i,
  output logic [N-L:0] v1_o,
  output logic [L-1:0] v2_o,
  output logic [N:0]   sum_o
);

  logic [COPIES-1:0][N-L:0] sig_out;  // output A of each processing unit
  logic [COPIES-1:0][L-1:0] lsp_out;  // output B* of each processing unit

  for (genvar k = 0; k < COPIES; k++) begin : g_pu
    fac_processing_unit #(
      .N (N),
      .L (L)
    ) u_pu (
      .a_i   (a_i),
      .b_i   (b_i),
      .sig_o (sig_out[k]),
      .lsp_o (lsp_out[k])
    );
  end

  majority_voter #(
    .WIDTH  (N - L + 1),
    .COPIES (COPIES)
  ) u_voter1 (
    .votes_i (sig_out),
    .vote_o  (v1_o)
  );

  majority_voter #(
    .WIDTH  (L),
    .COPIES (COPIES)
  ) u_voter2 (
    .votes_i (lsp_out),
    .vote_o  (v2_o)
  );

  assign sum_o = {v1_o, v2_o};

endmodule
