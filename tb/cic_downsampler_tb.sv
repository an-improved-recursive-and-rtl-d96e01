// cic_downsampler_tb: down-sampler by 16 with a random input strobe.
// The testbench counts strobes itself. tick must appear exactly once per
// 16 strobes, on the clock after the 16th, 32nd, ... strobe, and y must
// then hold the word presented with that strobe and keep it until the next
// tick.
module cic_downsampler_tb;
  localparam int R = 16, W = 16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] x = '0, y;
  logic tick;
  int checks = 0, failures = 0, ticks = 0, strobes = 0;
  logic [W-1:0] kept = '0;
  logic expect_tick = 0;

  cic_downsampler #(.R(R), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y), .tick(tick));

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
      en = ($urandom % 3) != 0;
      x  = W'($urandom);
      @(posedge clk);
      expect_tick = 0;
      if (en) begin
        strobes++;
        if (strobes % R == 0) begin
          expect_tick = 1;
          kept = x;
        end
      end
      #1;
      checks += 2;
      if (tick !== expect_tick) begin
        failures++;
        if (failures < 10) $display("t=%0d tick=%b expected %b", t, tick, expect_tick);
      end
      if (tick) ticks++;
      if (y !== kept) begin
        failures++;
        if (failures < 10) $display("t=%0d y=%h expected %h", t, y, kept);
      end
    end
    checks++;
    if (ticks != strobes / R) begin failures++; $display("ticks=%0d strobes=%0d", ticks, strobes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
