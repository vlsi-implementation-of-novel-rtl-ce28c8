// cla_adder -- the "high speed adder": a carry look-ahead adder built from
// 4-bit groups.
//
// Each group is four pfa slices and one cll4 block. Inside a group every
// carry comes from the look-ahead equations; between groups the carry out
// c4 of one group is the carry in of the next, exactly as in the 8-bit
// diagram where CLL-1's c4 feeds CLL-2 and the first slice of the upper
// nibble. WIDTH = 8 gives that diagram's two-group adder; the filter uses
// WIDTH = 25, 22, 20, 18 and 16. A width that is not a multiple of four is
// served by zero-padding the top group, whose unused slices are dropped.
//
// The paper's equations carry a c0 term; it is the port cin here. The
// integrators tie it to 0 (the 8-bit diagram has no carry in: its bit 0 is a
// plain half adder). The combs, a choice of this design, subtract with the
// same adder as a + ~b + 1, using cin = 1. Purely combinational; sum wraps
// modulo 2^WIDTH, which two's complement CIC arithmetic relies on.
module cla_adder #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout   // carry out of bit WIDTH-1
);
  localparam int unsigned NG = (WIDTH + 3) / 4;  // number of 4-bit groups
  localparam int unsigned PW = 4 * NG;           // padded width

  logic [PW-1:0] ap, bp, sp, p, g;
  logic [PW:0]   c;        // c[i] = carry into bit i
  logic [NG-1:0] grp_p, grp_g;

  assign ap   = PW'(a);
  assign bp   = PW'(b);
  assign c[0] = cin;

  for (genvar k = 0; k < NG; k++) begin : g_grp
    for (genvar i = 0; i < 4; i++) begin : g_bit
      pfa u_pfa (
        .a (ap[4*k+i]),
        .b (bp[4*k+i]),
        .c (c[4*k+i]),
        .s (sp[4*k+i]),
        .p (p[4*k+i]),
        .g (g[4*k+i])
      );
    end
    cll4 u_cll (
      .p  (p[4*k +: 4]),
      .g  (g[4*k +: 4]),
      .c0 (c[4*k]),
      .c  (c[4*k+1 +: 4]),
      .pg (grp_p[k]),
      .gg (grp_g[k])
    );
  end

  assign sum  = sp[WIDTH-1:0];
  assign cout = c[WIDTH];

  // The group signals must agree with the ripple of group carries.
  always_comb begin
    for (int k = 0; k < NG; k++) begin
      assert (c[4*k+4] == (grp_g[k] | (grp_p[k] & c[4*k])))
        else $error("cla_adder: group %0d carry disagrees with PG/GG", k);
    end
  end
endmodule
