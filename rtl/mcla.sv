// mcla: modified carry look-ahead adder of width W.
//
// The adder is cut into 4-bit groups. Each group is four partial full adders
// (pfa) and one carry look-ahead block (mcla_cll4) that computes the group's
// carries in parallel from p, g and the group carry in. The carry out of a
// group (c4) is the carry in of the next one, so the carry crosses the word
// one group at a time instead of one bit at a time. This is the structure of
// the published 8-bit MCLA (two groups, CLL-1 and CLL-2) continued to any
// width. When W is not a multiple of 4 the top group is padded with zero
// bits, whose p and g are 0, so they pass nothing on; the carry out is taken
// from the bit above the MSB.
//
// In the 8-bit drawing bit 0 is a plain half adder because that adder has no
// carry in; here bit 0 is a partial full adder fed by cin, which reduces to
// the same thing when cin = 0. Sum and carry out are combinational.
// The group propagate/generate signals (grp_p, grp_g) are formed as in the
// look-ahead equations but not needed by this one-level chain of groups;
// they are left for a second look-ahead level and show up as unused in lint.
// Sum bits of the zero padding are likewise unused.
module mcla #(
  parameter int unsigned W = 8       // adder width
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,          // carry into bit 0
  output logic [W-1:0] sum,          // a + b + cin, modulo 2**W
  output logic         cout          // carry out of bit W-1
);

  localparam int unsigned NG = (W + 3) / 4;   // number of 4-bit groups
  localparam int unsigned WP = 4 * NG;        // padded width

  logic [WP-1:0] ap, bp, s;
  logic [NG-1:0] grp_p, grp_g;                // group P_G, G_G of each group

  always_comb begin
    ap = '0;
    bp = '0;
    ap[W-1:0] = a;
    bp[W-1:0] = b;
  end

  // Each group keeps its carries in signals of its own, so the only path
  // from one group to the next is its carry out c4.
  for (genvar k = 0; k < NG; k++) begin : g_group
    logic       c0;                           // carry into the group
    logic [4:1] cg;                           // carries from the look-ahead logic
    logic [3:0] pl, gl, sl, cl;

    if (k == 0) begin : g_first
      assign c0 = cin;
    end else begin : g_next
      assign c0 = g_group[k-1].cg[4];
    end

    assign cl = {cg[3:1], c0};

    for (genvar i = 0; i < 4; i++) begin : g_bit
      pfa u_pfa (
        .a (ap[4*k+i]),
        .b (bp[4*k+i]),
        .c (cl[i]),
        .s (sl[i]),
        .p (pl[i]),
        .g (gl[i])
      );
    end

    mcla_cll4 u_cll (
      .p  (pl),
      .g  (gl),
      .c0 (c0),
      .c  (cg),
      .pg (grp_p[k]),
      .gg (grp_g[k])
    );

    assign s[4*k +: 4] = sl;
  end

  // Carry out of bit W-1: the group carry when W fills the top group,
  // otherwise the carry into the first padding bit.
  localparam int unsigned TOP = (W - 1) % 4;    // position of bit W-1 in its group

  assign sum = s[W-1:0];
  if (TOP == 3) begin : g_cout_full
    assign cout = g_group[NG-1].cg[4];
  end else begin : g_cout_part
    assign cout = g_group[NG-1].cg[TOP+1];
  end

endmodule
