// cll_tb: exhaustive check of the carry look-ahead logic for a 4-bit group
// (CLL-2 of the 8-bit MCLA) and a 3-bit group (CLL-1). Every g, p, cin
// combination is applied and each carry is compared with the carry
// obtained by rippling c(i+1) = g(i) | p(i) & c(i) bit by bit.
module cll_tb;
  logic [3:0] g4, p4, co4;
  logic [2:0] g3, p3, co3;
  logic       cin;
  int checks = 0, failures = 0;

  cll #(.GW(4)) dut4 (.g(g4), .p(p4), .cin(cin), .co(co4));
  cll #(.GW(3)) dut3 (.g(g3), .p(p3), .cin(cin), .co(co3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      logic c;
      {cin, g4, p4} = 9'(v);
      g3 = g4[2:0];
      p3 = p4[3:1];
      #1;
      c = cin;
      for (int i = 0; i < 4; i++) begin
        c = g4[i] | (p4[i] & c);
        checks++;
        if (co4[i] !== c) begin
          failures++;
          $display("GW=4 co[%0d] wrong: g=%b p=%b cin=%b", i, g4, p4, cin);
        end
      end
      c = cin;
      for (int i = 0; i < 3; i++) begin
        c = g3[i] | (p3[i] & c);
        checks++;
        if (co3[i] !== c) begin
          failures++;
          $display("GW=3 co[%0d] wrong: g=%b p=%b cin=%b", i, g3, p3, cin);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
