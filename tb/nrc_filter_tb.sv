// nrc_filter_tb: the three-stage non-recursive comb decimator (R = 8,
// M = 3, N = 5, 5-bit input, 20-bit output) end to end.
//
// The reference is equation (5) read from its left-hand side: a single FIR
// filter with h = coefficients of (sum_{i<8} z^-i)^5, 36 taps, evaluated
// only at every 8th sample: y[m] = sum_k h[k] * x[8m + 7 - k]. The RTL computes
// it as three cascaded (1 + z^-1)^5 stages with down-sampling by 2. The two
// forms agree only if every stage, width and down-sampling phase is right.
// The stimulus holds random words, runs at -16 and +15 (full-scale output,
// -2^19 and 15 * 2^15) and a first half on every clock, then random strobe
// gaps. Each output must appear exactly M*N = 15 clocks after the strobe of
// sample 8m + 7.
module nrc_filter_tb;
  localparam int L = 2400, NOUT = L / 8, HLEN = 36;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [4:0]  x_in = '0;
  logic [19:0] y_out;
  logic        out_valid;
  int checks = 0, failures = 0;
  int xs [L];
  int strobe_cyc [L];
  longint h [HLEN];
  int cyc = 0, got = 0;

  nrc_filter dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in),
    .y_out(y_out), .out_valid(out_valid));

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
    longint tmp [HLEN];
    int n;
    for (int k = 0; k < HLEN; k++) h[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < HLEN; k++) begin
        tmp[k] = 0;
        for (int j = 0; j < 8; j++) if (k - j >= 0) tmp[k] += h[k - j];
      end
      h = tmp;
    end
    for (int i = 0; i < L; i++) begin
      if (i >= 800 && i < 900)        xs[i] = -16;
      else if (i >= 1000 && i < 1100) xs[i] = 15;
      else                            xs[i] = int'($urandom % 32) - 16;
    end
    n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (n < L) begin
      @(negedge clk);
      in_valid = (n < L/2) ? 1'b1 : (($urandom % 3) != 0);
      if (in_valid) begin
        x_in = 5'(xs[n]);
        strobe_cyc[n] = cyc + 1;
        n++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (got != NOUT) begin failures++; $display("got %0d outputs", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid && got < NOUT) begin
      longint e;
      e = 0;
      for (int k = 0; k < HLEN; k++) if (8*got + 7 - k >= 0) e += h[k] * longint'(xs[8*got + 7 - k]);
      checks += 2;
      if (longint'($signed(y_out)) != e) begin
        failures++;
        if (failures < 10) $display("out %0d = %0d expected %0d", got, $signed(y_out), e);
      end
      if (cyc != strobe_cyc[8*got + 7] + 14) begin
        failures++;
        if (failures < 10) $display("out %0d at cycle %0d, strobe at %0d", got, cyc, strobe_cyc[8*got+7]);
      end
      got++;
    end
  end
endmodule
