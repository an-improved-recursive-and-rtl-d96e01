// pfa: partial full adder, one bit position of the modified carry
// look-ahead adder (mcla).
//
// It forms the carry generate g = a & b and propagate p = a ^ b that the
// look-ahead logic (cll) needs, and the sum s = p ^ c from the carry c that
// the look-ahead logic returns. It has no carry output of its own: the
// carries come from the cll, so no carry ripples from bit to bit.
// Purely combinational.
//
// The PFA's role and ports (a, b, c in; s, g, p out) follow the paper's
// 8-bit MCLA figure; the gate equations are the usual textbook ones.
module pfa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic s,
  output logic g,
  output logic p
);

  always_comb begin
    g = a & b;
    p = a ^ b;
    s = p ^ c;
  end

endmodule
