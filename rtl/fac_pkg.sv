// fac_pkg: constants and helpers shared by the FAC (fault-tolerant approximate
// computing) adder.
//
// The default sizes are those of the 32-bit FAC adder: N = 32 input bits, of
// which the L = 10 least significant bits form the approximate less
// significant part and the remaining N-L = 22 bits the accurate carry-lookahead
// significant part. Four of the approximate sum bits carry reduced logic; the
// rest are constant 1. The redundancy is three-fold (3-tuple FAC). The CLA
// group size of 4 is this design's own choice.
package fac_pkg;

  localparam int unsigned ADDER_N     = 32;  // adder input width
  localparam int unsigned APPROX_L    = 10;  // width of the approximate part
  localparam int unsigned APPROX_LOGIC_BITS = 4;  // approximate sum bits with logic
  localparam int unsigned FAC_COPIES  = 3;   // number of processing units
  localparam int unsigned CLA_GROUP   = 4;   // bits per carry-lookahead group

  // Three-input majority, F = XY + YZ + XZ, applied bit by bit.
  function automatic logic maj3(input logic x, input logic y, input logic z);
    return (x & y) | (y & z) | (x & z);
  endfunction

endpackage
