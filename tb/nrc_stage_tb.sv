// nrc_stage_tb: one non-recursive stage, (1 + z^-1)^5 and down-sampling
// by 2, on 5-bit input, with a random strobe. The reference is the direct
// convolution with the binomial coefficients 1 5 10 10 5 1, kept at every
// second sample: output m = sum_k C(5,k) * x[2m + 1 - k]. Each output must
// appear exactly N = 5 clocks after the strobe of sample 2m + 1.
module nrc_stage_tb;
  localparam int W = 5, N = 5, L = 2000;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0]   x = '0;
  logic [W+N-1:0] y;
  logic           out_valid;
  int checks = 0, failures = 0;
  int xs [L];
  int strobe_cyc [L];
  int cyc = 0, got = 0;
  int binom [N+1] = '{1, 5, 10, 10, 5, 1};

  nrc_stage #(.W_IN(W), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .y(y));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    for (int i = 0; i < L; i++) xs[i] = (i >= 1500 && i < 1600) ? -16 : int'($urandom % 32) - 16;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (n < L) begin
      @(negedge clk);
      in_valid = (n < 600) ? 1'b1 : (($urandom % 2) != 0);
      if (in_valid) begin
        x = W'(xs[n]);
        strobe_cyc[n] = cyc + 1;
        n++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (got != L / 2) begin failures++; $display("got %0d outputs", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid && got < L / 2) begin
      int e;
      e = 0;
      for (int k = 0; k <= N; k++) if (2*got + 1 - k >= 0) e += binom[k] * xs[2*got + 1 - k];
      checks += 2;
      if (int'($signed(y)) != e) begin
        failures++;
        if (failures < 10) $display("out %0d = %0d expected %0d", got, $signed(y), e);
      end
      if (cyc != strobe_cyc[2*got + 1] + N - 1) begin
        failures++;
        if (failures < 10) $display("out %0d at cycle %0d, strobe at %0d", got, cyc, strobe_cyc[2*got+1]);
      end
      got++;
    end
  end
endmodule
