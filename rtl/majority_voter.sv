// majority_voter: bitwise majority vote over the outputs of redundant
// processing units.
//
// Each output bit is the majority of the corresponding bit of the COPIES input
// words. For the 3-tuple case the voter is the textbook F = XY + YZ + XZ per
// bit. For higher-order (5-, 7-tuple) redundancy the bit is 1 when more than
// half of the copies are 1. The voter itself is assumed fault-free, as is usual
// for TMR-style schemes; it is not replicated here.
//
// Interface: votes_i[k] is the word from processing unit k; vote_o is the voted
// word (V1 or V2* in the FAC adder). Purely combinational, no clock.
module majority_voter
#(
  parameter int unsigned WIDTH  = fac_pkg::ADDER_N - fac_pkg::APPROX_L + 1,
  parameter int unsigned COPIES = fac_pkg::FAC_COPIES
) (
  input  logic [COPIES-1:0][WIDTH-1:0] votes_i,
  output logic [WIDTH-1:0]             vote_o
);

  initial begin
    assert (COPIES % 2 == 1 && COPIES >= 3)
      else $error("majority_voter: COPIES must be odd and at least 3");
  end

  always_comb begin
    for (int unsigned bit_idx = 0; bit_idx < WIDTH; bit_idx++) begin
      if (COPIES == 3) begin
        vote_o[bit_idx] = fac_pkg::maj3(votes_i[0][bit_idx], votes_i[1][bit_idx],
                               votes_i[2][bit_idx]);
      end else begin
        int unsigned ones;
        ones = 0;
        for (int unsigned k = 0; k < COPIES; k++) ones += 32'(votes_i[k][bit_idx]);
        vote_o[bit_idx] = (ones > COPIES / 2);
      end
    end
  end

endmodule
