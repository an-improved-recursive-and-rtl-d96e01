// pfa_tb: exhaustive check of the partial full adder.
// All 8 input combinations are applied; s, g and p are compared with the
// arithmetic definition of a one-bit sum (s = LSB of a+b+c) and of carry
// generate (both bits set) and propagate (exactly one bit set).
module pfa_tb;
  logic a, b, c, s, g, p;
  int checks = 0, failures = 0;

  pfa dut (.a(a), .b(b), .c(c), .s(s), .g(g), .p(p));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int total;
      {a, b, c} = 3'(v);
      #1;
      total = int'(a) + int'(b) + int'(c);
      checks += 3;
      if (s !== total[0])            begin failures++; $display("s wrong for %0d", v); end
      if (g !== (int'(a) + int'(b) == 2)) begin failures++; $display("g wrong for %0d", v); end
      if (p !== (int'(a) + int'(b) == 1)) begin failures++; $display("p wrong for %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
