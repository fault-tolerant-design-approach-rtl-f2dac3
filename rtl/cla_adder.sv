// cla_adder: accurate two-level carry-lookahead adder.
//
// This is the accurate, significant part of each FAC processing unit: it adds
// the upper WIDTH bits of both operands and the carry input handed over by the
// approximate part, giving WIDTH+1 sum bits (the top bit is the carry out).
//
// How it works: every bit forms generate g = a & b and propagate p = a ^ b.
// The bits are split into groups of GROUP bits (the last group may be
// shorter). Each group forms a group generate and group propagate. A second
// lookahead level computes the carry into every group directly from the group
// signals and cin, as a flat sum of products (no ripple between groups).
// Inside a group, each bit carry is likewise a flat sum of products of the
// bit g/p terms and the group carry in. The sum bit is p ^ carry.
//
// The adder is described as a CLA, but its internal structure is not spelled
// out; the grouping and the two-level lookahead are this design's own choice.
//
// Interface: a_i, b_i, cin_i in; sum_o = a_i + b_i + cin_i, WIDTH+1 bits.
// Purely combinational.
module cla_adder
#(
  parameter int unsigned WIDTH = fac_pkg::ADDER_N - fac_pkg::APPROX_L,
  parameter int unsigned GROUP = fac_pkg::CLA_GROUP
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  input  logic             cin_i,
  output logic [WIDTH:0]   sum_o
);

  localparam int unsigned NGROUPS = (WIDTH + GROUP - 1) / GROUP;

  logic [WIDTH-1:0]   g, p;       // bit generate / propagate
  logic [NGROUPS-1:0] gg, gp;     // group generate / propagate
  logic [NGROUPS:0]   gc;         // carry into each group, gc[NGROUPS] = cout
  logic [WIDTH-1:0]   c;          // carry into each bit

  assign g = a_i & b_i;
  assign p = a_i ^ b_i;

  // Group generate and propagate.
  always_comb begin
    for (int unsigned k = 0; k < NGROUPS; k++) begin
      int unsigned lo, hi;
      logic        term;
      lo = k * GROUP;
      hi = (lo + GROUP > WIDTH) ? WIDTH - 1 : lo + GROUP - 1;
      gg[k] = 1'b0;
      gp[k] = 1'b1;
      for (int unsigned i = lo; i <= hi; i++) begin
        gp[k] = gp[k] & p[i];
        // g[i] propagated through every bit above it in the group
        term = g[i];
        for (int unsigned j = i + 1; j <= hi; j++) term = term & p[j];
        gg[k] = gg[k] | term;
      end
    end
  end

  // Second level: carry into group k as a flat sum of products.
  always_comb begin
    gc[0] = cin_i;
    for (int unsigned k = 1; k <= NGROUPS; k++) begin
      logic term;
      term = cin_i;
      for (int unsigned m = 0; m < k; m++) term = term & gp[m];
      gc[k] = term;
      for (int unsigned m = 0; m < k; m++) begin
        term = gg[m];
        for (int unsigned j = m + 1; j < k; j++) term = term & gp[j];
        gc[k] = gc[k] | term;
      end
    end
  end

  // First level: carry into each bit from its group carry.
  always_comb begin
    for (int unsigned i = 0; i < WIDTH; i++) begin
      int unsigned k, lo;
      logic        term;
      k  = i / GROUP;
      lo = k * GROUP;
      term = gc[k];
      for (int unsigned j = lo; j < i; j++) term = term & p[j];
      c[i] = term;
      for (int unsigned m = lo; m < i; m++) begin
        term = g[m];
        for (int unsigned j = m + 1; j < i; j++) term = term & p[j];
        c[i] = c[i] | term;
      end
    end
  end

  assign sum_o = {gc[NGROUPS], p ^ c};

endmodule
