// cic_freq_response_tb: frequency response of the CIC decimator, R = 16,
// M = 1, N = 5, measured with sine inputs.
//
// For each test frequency f = k/1024 (cycles per input sample) a rounded
// sine is fed in, and the decimated output is analysed with a single-bin
// DFT at its aliased frequency 16f mod 1, over 512 outputs after a settling
// time. The measured gain, output amplitude over the input's own amplitude
// at f, is compared with the closed form
//     |H(f)| = | sin(16 pi f) / sin(pi f) |^5.
// Two filters are measured:
//   dut_w  untruncated, 12-bit input of amplitude 2000, 32-bit registers:
//          within 0.5 % in the passband (k = 3, 13, 21, 29, up to the
//          output Nyquist frequency) and, at stopband points (k = 70, 100,
//          150), within 25 % of |H| plus 1e-4 of the DC gain (-80 dB);
//   dut_t  the default truncated filter, 5-bit input of amplitude 15,
//          output scaled by 2^9: within 3 % in the passband.
// The rounding of the input sine leaks a little energy into the alias
// bands; the tolerances cover that. The printed stopband values of the
// truncated filter (about -50 to -60 dB) are dominated by the 5-bit
// rounding of its input and are not checked.
module cic_freq_response_tb;
  localparam int K_OUT = 512, SKIP = 16, L = (K_OUT + SKIP) * 16;
  localparam int unsigned WIDE [5] = '{32, 32, 32, 32, 32};
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [11:0] xw = '0;
  logic [4:0]  xt = '0;
  logic [31:0] yw;
  logic [15:0] yt;
  logic vw, vt;
  int checks = 0, failures = 0;

  cic_filter #(.B_IN(12), .INT_W(WIDE), .COMB_W(32)) dut_w (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_in(xw),
    .s_out(yw), .out_valid(vw));

  cic_filter dut_t (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_in(xt),
    .s_out(yt), .out_valid(vt));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real h_mag(real f);
    return ($sin(16.0 * PI * f) / $sin(PI * f)) ** 5;
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Collected outputs of one run.
  real ow [K_OUT];
  real ot [K_OUT];
  int  nout;

  always @(posedge clk) begin
    #1;
    if (vw && nout >= SKIP && nout < SKIP + K_OUT) begin
      ow[nout - SKIP] = real'($signed(yw));
      ot[nout - SKIP] = real'($signed(yt)) * 512.0;
    end
    if (vw) nout++;
  end

  task automatic run(input int k, input bit passband);
    real f, fo, re, im, in_w_re, in_w_im, in_t_re, in_t_im;
    real amp_in_w, amp_in_t, amp_w, amp_t, hm, gw, gt;
    int  sw [L];
    int  st [L];
    f  = real'(k) / 1024.0;
    fo = 16.0 * f - $floor(16.0 * f);
    for (int n = 0; n < L; n++) begin
      sw[n] = int'($floor(2000.0 * $sin(2.0 * PI * f * n) + 0.5));
      st[n] = int'($floor(15.0 * $sin(2.0 * PI * f * n) + 0.5));
    end
    // Amplitude of the rounded input at f, over a whole number of periods.
    in_w_re = 0.0; in_w_im = 0.0; in_t_re = 0.0; in_t_im = 0.0;
    for (int n = 0; n < 8192; n++) begin
      in_w_re += sw[n] * $cos(2.0 * PI * f * n);
      in_w_im += sw[n] * $sin(2.0 * PI * f * n);
      in_t_re += st[n] * $cos(2.0 * PI * f * n);
      in_t_im += st[n] * $sin(2.0 * PI * f * n);
    end
    amp_in_w = 2.0 / 8192.0 * $sqrt(in_w_re * in_w_re + in_w_im * in_w_im);
    amp_in_t = 2.0 / 8192.0 * $sqrt(in_t_re * in_t_re + in_t_im * in_t_im);

    rst_n = 0;
    nout = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < L; n++) begin
      @(negedge clk);
      in_valid = 1;
      xw = 12'(sw[n]);
      xt = 5'(st[n]);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);

    re = 0.0; im = 0.0;
    for (int m = 0; m < K_OUT; m++) begin
      re += ow[m] * $cos(2.0 * PI * fo * m);
      im += ow[m] * $sin(2.0 * PI * fo * m);
    end
    amp_w = 2.0 / K_OUT * $sqrt(re * re + im * im);
    re = 0.0; im = 0.0;
    for (int m = 0; m < K_OUT; m++) begin
      re += ot[m] * $cos(2.0 * PI * fo * m);
      im += ot[m] * $sin(2.0 * PI * fo * m);
    end
    amp_t = 2.0 / K_OUT * $sqrt(re * re + im * im);

    hm = absr(h_mag(f));
    gw = amp_w / amp_in_w;
    gt = amp_t / amp_in_t;
    $display("f=%0d/1024 |H|=%.1f dB  untruncated %.1f dB  truncated %.1f dB",
             k, 20.0 * $log10(hm / 1048576.0), 20.0 * $log10(gw / 1048576.0),
             20.0 * $log10(gt / 1048576.0 + 1e-12));
    checks++;
    if (passband) begin
      if (absr(gw - hm) > 0.005 * hm) begin failures++; $display("  untruncated gain off"); end
      checks++;
      if (absr(gt - hm) > 0.03 * hm) begin failures++; $display("  truncated gain off"); end
    end else begin
      if (absr(gw - hm) > 0.25 * hm + 1e-4 * 1048576.0) begin failures++; $display("  stopband gain off"); end
    end
  endtask

  initial begin
    int pass_k [4];
    int stop_k [3];
    pass_k = '{3, 13, 21, 29};
    stop_k = '{70, 100, 150};
    repeat (2) @(posedge clk);
    for (int i = 0; i < 4; i++) run(pass_k[i], 1'b1);
    for (int i = 0; i < 3; i++) run(stop_k[i], 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
