// cll: carry look-ahead logic for one group of GW bits (GW <= 4 here).
//
// From the generate/propagate pairs of the group and the group carry-in it
// computes the carry out of every bit, co[i], each as one flat sum of
// products:
//   co[i] = g[i] | p[i]g[i-1] | p[i]p[i-1]g[i-2] | ... | p[i]..p[0]cin
// so every carry of the group is available after two logic levels instead
// of rippling through the group. Purely combinational.
//
// Interface: co[i] is the carry out of bit i of the group, i.e. the carry
// into bit i+1; co[GW-1] is the group carry-out handed to the next group.
// The paper's 8-bit MCLA has two such blocks (CLL-1, CLL-2). The flattened
// equations are the standard look-ahead form; the paper does not print
// them.
module cll #(
  parameter int unsigned GW = 4
) (
  input  logic [GW-1:0] g,
  input  logic [GW-1:0] p,
  input  logic          cin,
  output logic [GW-1:0] co
);

  always_comb begin
    for (int i = 0; i < GW; i++) begin
      logic term;
      logic acc;
      // Start with the term that carries cin through bits 0..i.
      term = cin;
      for (int k = 0; k <= i; k++) term = term & p[k];
      acc = term;
      // Add the terms where bit j generates and bits j+1..i propagate.
      for (int j = 0; j <= i; j++) begin
        term = g[j];
        for (int k = j + 1; k <= i; k++) term = term & p[k];
        acc = acc | term;
      end
      co[i] = acc;
    end
  end

endmodule
