// mcla_cll4: carry look-ahead logic of one 4-bit group of the MCLA.
//
// From the bit propagate/generate signals p[3:0], g[3:0] of four partial
// full adders and the group carry in c0 it forms every carry of the group in
// two-level AND-OR form, without rippling:
//   c1 = g0 + p0.c0
//   c2 = g1 + p1.g0 + p1.p0.c0
//   c3 = g2 + p2.g1 + p2.p1.g0 + p2.p1.p0.c0
//   c4 = g3 + p3.g2 + p3.p2.g1 + p3.p2.p1.g0 + p3.p2.p1.p0.c0
// and the group propagate P_G = p3.p2.p1.p0 and generate
// G_G = g3 + p3.g2 + p3.p2.g1 + p3.p2.p1.g0 (so c4 = G_G + P_G.c0).
// These are the published look-ahead equations. c4 is the carry into the
// next group. Purely combinational.
module mcla_cll4 (
  input  logic [3:0] p,   // bit propagate signals
  input  logic [3:0] g,   // bit generate signals
  input  logic       c0,  // carry into the group
  output logic [4:1] c,   // carries into bits 1..3 and out of the group (c[4])
  output logic       pg,  // group propagate P_G
  output logic       gg   // group generate G_G
);

  always_comb begin
    c[1] = g[0] | (p[0] & c0);
    c[2] = g[1] | (p[1] & g[0]) | (p[1] & p[0] & c0);
    c[3] = g[2] | (p[2] & g[1]) | (p[2] & p[1] & g[0]) | (p[2] & p[1] & p[0] & c0);
    c[4] = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0])
         | (p[3] & p[2] & p[1] & p[0] & c0);
    pg   = &p;
    gg   = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0]);
  end

endmodule
