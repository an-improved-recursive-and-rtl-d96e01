// nrc_block_tb: one (1 + z^-1) block, 5-bit input, random words and a
// random strobe. One clock after each strobe, out_valid must be high and y
// must equal the sum of this word and the previous accepted word (0 after
// reset), sign-extended to 6 bits. Between strobes out_valid must be low
// and y must hold.
module nrc_block_tb;
  localparam int W = 5;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0] x = '0;
  logic [W:0]   y;
  logic         out_valid;
  int checks = 0, failures = 0;
  int prev = 0, expect_y = 0;
  logic expect_v = 0;

  nrc_block #(.W_IN(W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .y(y));

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
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int xv;
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      xv = int'($urandom % 32) - 16;
      x = W'(xv);
      @(posedge clk);
      expect_v = in_valid;
      if (in_valid) begin
        expect_y = xv + prev;
        prev = xv;
      end
      #1;
      checks += 2;
      if (out_valid !== expect_v) begin failures++; $display("t=%0d valid %b", t, out_valid); end
      if (int'($signed(y)) != expect_y) begin
        failures++;
        if (failures < 10) $display("t=%0d y=%0d expected %0d", t, $signed(y), expect_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
