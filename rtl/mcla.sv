// mcla: modified carry look-ahead adder, W bits wide.
//
// The word is cut into 4-bit groups from the LSB up. Each bit is a partial
// full adder (pfa) that delivers generate and propagate. Each group has its
// own look-ahead logic (cll), which computes all carries of the group at once
// from the group carry-in. The group carry-out becomes the carry-in of the
// next group. With W = 8 this is the two-group 8-bit structure of the paper:
// CLL-1 serves bits 0..3 and its carry c4 feeds CLL-2 for bits 4..7, and c8
// is the carry-out. If W is not a multiple of 4, the last group is narrower.
//
// Departure from the paper: a carry-in port is added. In the paper's figure
// bit 0 is a half adder (p0, g0 with c1 = g0). With cin = 0 this adder
// computes exactly that. The comb subtractors drive cin = 1 to form
// a + ~b + 1.
//
// Interface: s = (a + b + cin) mod 2^W, cout = carry out of bit W-1.
// Purely combinational.
module mcla #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);

  localparam int unsigned NG = (W + 3) / 4;   // number of 4-bit groups

  logic [W-1:0] g, p;
  logic [W:0]   c;       // c[i] = carry into bit i, c[W] = carry out

  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_bit
    pfa u_pfa (.a(a[i]), .b(b[i]), .c(c[i]), .s(s[i]), .g(g[i]), .p(p[i]));
  end

  for (genvar grp = 0; grp < NG; grp++) begin : g_grp
    localparam int unsigned LO = grp * 4;
    localparam int unsigned GW = (W - LO < 4) ? (W - LO) : 4;
    cll #(.GW(GW)) u_cll (
      .g  (g[LO +: GW]),
      .p  (p[LO +: GW]),
      .cin(c[LO]),
      .co (c[LO+1 +: GW])
    );
  end

  assign cout = c[W];

endmodule
