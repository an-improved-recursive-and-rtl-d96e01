// cic_filter_tb: the five-stage CIC decimator (N=5, M=1, R=16) end to end.
//
// Two instances see the same input stream:
//   dut_t  the default, truncated filter (25/22/20/18/16-bit integrators,
//          16-bit combs);
//   dut_f  the same filter with no truncation: every register 25 bits.
// The stimulus is 1280 five-bit samples: random words, a -15 step, a +15
// step, and random words again. All words lie in -15..+15: an input of
// exactly -16 makes the truncated filter's error push the 16-bit output
// past -2^15, where it wraps. The
// first half is sent on every clock, the second half with random gaps in
// the strobe.
//
// Checks:
//  * dut_f must equal, modulo 2^25, the direct convolution of the input with
//    h = coefficients of (sum_{k<16} z^-k)^5, taken at sample 16m+10.
//  * dut_t must match, bit for bit, a behavioural model of the truncated
//    recursion. The model works sample by sample on integers. It differs
//    from the RTL's clocked form.
//  * dut_t, scaled by 2^9, must stay within TOL output LSBs of the exact
//    result, and within STEP_TOL LSBs of x * 2^11 once a step has settled.
//    The truncation error of the 25/22/20/18/16 widths reaches a few hundred
//    LSBs on random input; a settled step lands a few tens of LSBs off.
//  * out_valid must rise exactly one clock after the tick following the
//    strobe of sample 16m+15, once per 16 accepted samples.
module cic_filter_tb;
  localparam int L = 1280, NOUT = L / 16, HLEN = 76;
  localparam int TOL = 512;  // output LSBs of the 16-bit output
  localparam int STEP_TOL = 64;
  localparam int unsigned FULL_W [5] = '{25, 25, 25, 25, 25};

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [4:0]  a_in = '0;
  logic [15:0] s_t;
  logic [24:0] s_f;
  logic        v_t, v_f;

  int checks = 0, failures = 0;
  int x [L];
  longint h [HLEN];
  longint exact [NOUT];
  int unsigned model [NOUT];
  int strobe_cyc [L];
  int cyc = 0;
  int max_err = 0;
  int got = 0;
  int step_neg = 0, step_pos = 0;

  cic_filter dut_t (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_in(a_in),
    .s_out(s_t), .out_valid(v_t));

  cic_filter #(.INT_W(FULL_W), .COMB_W(25)) dut_f (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_in(a_in),
    .s_out(s_f), .out_valid(v_f));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference values.
  initial begin
    longint box [HLEN];
    longint tmp [HLEN];
    int unsigned iw [5];
    longint unsigned ireg [5];
    longint unsigned cprev [5];
    int m;
    iw = '{25, 22, 20, 18, 16};

    for (int n = 0; n < L; n++) begin
      if (n < 320)      x[n] = int'($urandom % 31) - 15;
      else if (n < 640) x[n] = -15;
      else if (n < 960) x[n] = 15;
      else              x[n] = int'($urandom % 31) - 15;
    end

    // h = boxcar(16) convolved with itself 5 times.
    for (int k = 0; k < HLEN; k++) h[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < HLEN; k++) begin
        tmp[k] = 0;
        for (int j = 0; j < 16; j++) if (k - j >= 0) tmp[k] += h[k - j];
      end
      h = tmp;
    end
    for (m = 0; m < NOUT; m++) begin
      exact[m] = 0;
      for (int k = 0; k < HLEN; k++)
        if (16*m + 10 - k >= 0) exact[m] += h[k] * longint'(x[16*m + 10 - k]);
    end

    // Truncated recursion, sample by sample.
    for (int k = 0; k < 5; k++) begin ireg[k] = 0; cprev[k] = 0; end
    m = 0;
    for (int n = 0; n < L; n++) begin
      if (n % 16 == 15) begin
        longint unsigned v, d;
        v = ireg[4];
        for (int k = 0; k < 5; k++) begin
          d = (v - cprev[k]) & 64'hFFFF;
          cprev[k] = v;
          v = d;
        end
        model[m] = 32'(v);
        m++;
      end
      for (int k = 4; k >= 1; k--)
        ireg[k] = (ireg[k] + (ireg[k-1] >> (iw[k-1] - iw[k]))) % (64'd1 << iw[k]);
      ireg[0] = (ireg[0] + longint'(x[n])) & 64'h1FF_FFFF;
    end
  end

  // Stimulus.
  initial begin
    int n;
    n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (n < L) begin
      @(negedge clk);
      in_valid = (n < L/2) ? 1'b1 : (($urandom % 3) != 0);
      if (in_valid) begin
        a_in = 5'(x[n]);
        strobe_cyc[n] = cyc + 1;   // cyc value after the sampling edge
        n++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);
    $display("max truncation error = %0d LSB; settled steps %0d and %0d (exact -/+%0d)",
             max_err, step_neg, step_pos, 15 * 2048);
    checks++;
    if (got != NOUT) begin failures++; $display("got %0d outputs, expected %0d", got, NOUT); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.

  always @(posedge clk) begin
    #1;
    checks++;
    if (v_t !== v_f) begin failures++; $display("valid mismatch at %0d", cyc); end
    if (v_t && got < NOUT) begin
      int err;
      checks += 4;
      if (cyc != strobe_cyc[16*got + 15] + 1) begin
        failures++;
        $display("out %0d at cycle %0d, expected %0d", got, cyc, strobe_cyc[16*got + 15] + 1);
      end
      if (s_f !== 25'(exact[got])) begin
        failures++;
        $display("full-width out %0d = %0d expected %0d", got, $signed(s_f), exact[got]);
      end
      if (s_t !== 16'(model[got])) begin
        failures++;
        $display("truncated out %0d = %h expected %h", got, s_t, model[got]);
      end
      err = int'((longint'($signed(s_t)) * 512 - exact[got]) / 512);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      if (err > TOL) begin
        failures++;
        $display("truncation error %0d LSB at out %0d", err, got);
      end
      // Settled step outputs: the exact value is x * 2^20, 2^11 in output LSBs.
      if (got == 38 && (int'($signed(s_t)) + 15 * 2048 > STEP_TOL || int'($signed(s_t)) + 15 * 2048 < -STEP_TOL)) begin
        failures++; $display("negative step settles to %0d", $signed(s_t));
      end
      if (got == 58 && (int'($signed(s_t)) - 15 * 2048 > STEP_TOL || int'($signed(s_t)) - 15 * 2048 < -STEP_TOL)) begin
        failures++; $display("positive step settles to %0d", $signed(s_t));
      end
      if (got == 38) step_neg = int'($signed(s_t));
      if (got == 58) step_pos = int'($signed(s_t));
      got++;
    end
  end
endmodule
