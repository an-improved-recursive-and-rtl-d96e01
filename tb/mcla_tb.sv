// mcla_tb: the 8-bit MCLA of the paper checked exhaustively (all a, b and
// both carry-ins), plus 25-bit (integrator 1) and 6-bit (narrow last group)
// instances checked with random operands. Each result is compared with the
// integer sum a + b + cin, split into sum and carry-out.
module mcla_tb;
  logic [7:0]  a8, b8, s8;
  logic [24:0] a25, b25, s25;
  logic [5:0]  a6, b6, s6;
  logic        cin, co8, co25, co6;
  int checks = 0, failures = 0;

  mcla #(.W(8))  dut8  (.a(a8),  .b(b8),  .cin(cin), .s(s8),  .cout(co8));
  mcla #(.W(25)) dut25 (.a(a25), .b(b25), .cin(cin), .s(s25), .cout(co25));
  mcla #(.W(6))  dut6  (.a(a6),  .b(b6),  .cin(cin), .s(s6),  .cout(co6));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ref_sum;
    for (int v = 0; v < (1 << 17); v++) begin
      {cin, a8, b8} = 17'(v);
      #1;
      ref_sum = longint'(a8) + longint'(b8) + longint'(cin);
      checks++;
      if ({co8, s8} !== ref_sum[8:0]) begin
        failures++;
        if (failures < 10) $display("W=8: %0d + %0d + %0d gave %0d", a8, b8, cin, {co8, s8});
      end
    end
    for (int t = 0; t < 20000; t++) begin
      a25 = 25'($urandom); b25 = 25'($urandom);
      a6 = 6'($urandom); b6 = 6'($urandom); cin = 1'($urandom);
      if (t < 4) begin  // carry across every group
        a25 = '1; b25 = 25'(t % 2); a6 = '1; b6 = 6'(t % 2); cin = 1'(t / 2);
      end
      #1;
      ref_sum = longint'(a25) + longint'(b25) + longint'(cin);
      checks++;
      if ({co25, s25} !== ref_sum[25:0]) begin
        failures++;
        if (failures < 10) $display("W=25: %0d + %0d + %0d gave %0d", a25, b25, cin, {co25, s25});
      end
      ref_sum = longint'(a6) + longint'(b6) + longint'(cin);
      checks++;
      if ({co6, s6} !== ref_sum[6:0]) begin
        failures++;
        if (failures < 10) $display("W=6: %0d + %0d + %0d gave %0d", a6, b6, cin, {co6, s6});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
