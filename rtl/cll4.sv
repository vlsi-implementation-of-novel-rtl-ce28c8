// cll4 -- 4-bit carry look-ahead logic (the CLL-1 / CLL-2 boxes).
//
// From the four bit propagates p[3:0], generates g[3:0] and the group carry
// in c0 it forms every carry of the group in two levels of logic, with no
// rippling:
//   c1 = g0 + p0 c0
//   c2 = g1 + p1 g0 + p1 p0 c0
//   c3 = g2 + p2 g1 + p2 p1 g0 + p2 p1 p0 c0
//   c4 = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0 + p3 p2 p1 p0 c0
// together with the group propagate PG = p3 p2 p1 p0 and group generate
// GG = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0, so that c4 = GG + PG c0.
// These are the paper's equations 5 to 10, written out term by term.
// Purely combinational.
module cll4 (
  input  logic [3:0] p,
  input  logic [3:0] g,
  input  logic       c0,
  output logic [4:1] c,   // c[k] is the carry into bit k; c[4] leaves the group
  output logic       pg,  // group propagate
  output logic       gg   // group generate
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
