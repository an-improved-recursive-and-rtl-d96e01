// cic_integrator_tb: the 25-bit integrator cell driven with random words
// and a random strobe. After every clock the register must equal the
// running sum, modulo 2^25, of the words accepted so far. A long run of
// large words makes the register wrap around several times.
module cic_integrator_tb;
  localparam int W = 25;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] x = '0, y;
  int checks = 0, failures = 0, wraps = 0;
  longint unsigned acc = 0;

  cic_integrator #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    checks++;
    if (y !== '0) begin failures++; $display("not cleared by reset"); end
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      x  = W'($urandom);
      @(posedge clk);
      if (en) begin
        if (acc + longint'(x) >= (64'd1 << W)) wraps++;
        acc = (acc + longint'(x)) % (64'd1 << W);
      end
      #1;
      checks++;
      if (longint'(y) != acc) begin
        failures++;
        if (failures < 10) $display("t=%0d y=%0d expected %0d", t, y, acc);
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("no wrap-around exercised"); end
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
