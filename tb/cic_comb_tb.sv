// cic_comb_tb: comb cells with M = 1 (the paper's value) and M = 2, 16 bits
// wide, driven with random words and a random low-rate strobe. While the
// strobe is high, y must equal x minus the word accepted M strobes earlier
// (0 after reset), modulo 2^16.
module cic_comb_tb;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] x = '0, y1, y2;
  int checks = 0, failures = 0;
  logic [W-1:0] h0 = '0, h1 = '0;   // last and second-last accepted words

  cic_comb #(.W(W), .M(1)) dut1 (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y1));
  cic_comb #(.W(W), .M(2)) dut2 (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y2));

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
      @(negedge clk);
      en = ($urandom % 4) == 0;
      x  = W'($urandom);
      #1;
      checks += 2;
      if (y1 !== W'(int'(x) - int'(h0))) begin
        failures++;
        if (failures < 10) $display("M=1 t=%0d y=%h x=%h h=%h", t, y1, x, h0);
      end
      if (y2 !== W'(int'(x) - int'(h1))) begin
        failures++;
        if (failures < 10) $display("M=2 t=%0d y=%h x=%h h=%h", t, y2, x, h1);
      end
      @(posedge clk);
      if (en) begin
        h1 = h0;
        h0 = x;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
