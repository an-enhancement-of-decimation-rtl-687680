// mcla_cll: 4-bit carry lookahead logic of the modified carry lookahead
// adder (the CLL-1 / CLL-2 blocks of the 8-bit MCLA).
//
// From the four bit propagates p[3:0], generates g[3:0] and the group's
// carry-in c0 it forms every carry of the group in two levels of logic:
//   c1 = g0 + p0 c0
//   c2 = g1 + p1 g0 + p1 p0 c0
//   c3 = g2 + p2 g1 + p2 p1 g0 + p2 p1 p0 c0
//   c4 = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0 + p3 p2 p1 p0 c0
// and the group propagate PG = p3 p2 p1 p0 and generate
// GG = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0. c4 is the group's carry-out and,
// in the MCLA, the next group's carry-in. All equations are the paper's.
// Purely combinational.
module mcla_cll (
  input  logic [3:0] p,    // bit propagates of the group
  input  logic [3:0] g,    // bit generates of the group
  input  logic       c0,   // carry into the group
  output logic [4:1] c,    // carries into bits 1..3 and out of the group (c[4])
  output logic       pg,   // group propagate
  output logic       gg    // group generate
);

  always_comb begin
    c[1] = g[0] | (p[0] & c0);
    c[2] = g[1] | (p[1] & g[0]) | (p[1] & p[0] & c0);
    c[3] = g[2] | (p[2] & g[1]) | (p[2] & p[1] & g[0]) | (p[2] & p[1] & p[0] & c0);
    c[4] = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0])
         | (p[3] & p[2] & p[1] & p[0] & c0);
    pg   = p[3] & p[2] & p[1] & p[0];
    gg   = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0]);
  end

endmodule
