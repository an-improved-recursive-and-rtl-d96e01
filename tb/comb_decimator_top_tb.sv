// comb_decimator_top_tb: both decimators at their default sizes, driven by
// one stream of 5-bit modulator words, end to end. The top has no
// parameters, so this is also the full-size test.
//
// Stimulus (4096 words, all within -15..+15): a sine of amplitude 14 at
// fs/64 rounded to integers, random words, a +15 step, a -15 step and
// random words again. The first 2048 words come on every clock; the rest
// come with random gaps in the strobe.
//
// References, computed here from the input alone:
//  * non-recursive output m = sum_k h8[k] x[8m+7-k], h8 = (sum_{i<8} z^-i)^5;
//  * CIC output m: a sample-by-sample integer model of the truncated
//    recursion (bit exact), plus the exact value
//    sum_k h16[k] x[16m+10-k], h16 = (sum_{i<16} z^-i)^5, which the output
//    times 2^9 must approach within TOL LSBs.
// Mechanisms counted, each of which must occur at least once: CIC and
// non-recursive outputs, strobe gaps (input stalls), wrap-around in a CIC
// integrator, LSBs dropped by truncation, and a settled step response.
module comb_decimator_top_tb;
  localparam int L = 4096, HL16 = 76, HL8 = 36;
  localparam int TOL = 512;       // CIC output LSBs, any output
  localparam int STEP_TOL = 64;   // CIC output LSBs, settled step
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [4:0]  sd_in = '0;
  logic [15:0] cic_out;
  logic        cic_valid;
  logic [19:0] nrc_out;
  logic        nrc_valid;

  int checks = 0, failures = 0;
  int xs [L];
  int strobe_cyc [L];
  longint h16 [HL16];
  longint h8 [HL8];
  int unsigned cic_model [L/16];
  int cyc = 0, n_cic = 0, n_nrc = 0;
  int stalls = 0, wraps = 0, trunc_drops = 0, steps_settled = 0, max_err = 0;

  comb_decimator_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .sd_in(sd_in),
    .cic_out(cic_out), .cic_valid(cic_valid),
    .nrc_out(nrc_out), .nrc_valid(nrc_valid));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Signed value of a W-bit word held in a longint.
  function automatic longint sx(longint unsigned v, int w);
    longint r;
    r = longint'(v & ((64'd1 << w) - 1));
    if (r >= (64'sd1 <<< (w - 1))) r -= (64'sd1 <<< w);
    return r;
  endfunction

  initial begin
    longint t16 [HL16];
    longint t8 [HL8];
    int unsigned iw [5];
    longint unsigned ireg [5];
    longint unsigned cprev [5];
    int m, n;
    iw = '{25, 22, 20, 18, 16};

    for (int i = 0; i < L; i++) begin
      if (i < 1024)      xs[i] = int'($rtoi(14.0 * $sin(2.0 * 3.14159265358979 * i / 64.0) + 14.5)) - 14;
      else if (i < 2048) xs[i] = int'($urandom % 31) - 15;
      else if (i < 2560) xs[i] = 15;
      else if (i < 3072) xs[i] = -15;
      else               xs[i] = int'($urandom % 31) - 15;
    end

    for (int k = 0; k < HL16; k++) h16[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < HL16; k++) begin
        t16[k] = 0;
        for (int j = 0; j < 16; j++) if (k - j >= 0) t16[k] += h16[k - j];
      end
      h16 = t16;
    end
    for (int k = 0; k < HL8; k++) h8[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      for (int k = 0; k < HL8; k++) begin
        t8[k] = 0;
        for (int j = 0; j < 8; j++) if (k - j >= 0) t8[k] += h8[k - j];
      end
      h8 = t8;
    end

    // Truncated CIC recursion, sample by sample, with event counts.
    for (int k = 0; k < 5; k++) begin ireg[k] = 0; cprev[k] = 0; end
    m = 0;
    for (int i = 0; i < L; i++) begin
      if (i % 16 == 15) begin
        longint unsigned v, d;
        v = ireg[4];
        for (int k = 0; k < 5; k++) begin
          d = (v - cprev[k]) & 64'hFFFF;
          cprev[k] = v;
          v = d;
        end
        cic_model[m] = 32'(v);
        m++;
      end
      for (int k = 4; k >= 0; k--) begin
        longint a, b, s;
        int sh;
        sh = (k == 0) ? 0 : int'(iw[k-1] - iw[k]);
        a = sx(ireg[k], iw[k]);
        b = (k == 0) ? longint'(xs[i]) : sx(ireg[k-1] >> sh, iw[k]);
        if (k > 0 && (ireg[k-1] & ((64'd1 << sh) - 1)) != 0) trunc_drops++;
        s = a + b;
        if (s >= (64'sd1 <<< (iw[k] - 1)) || s < -(64'sd1 <<< (iw[k] - 1))) wraps++;
        ireg[k] = longint'(s) & ((64'd1 << iw[k]) - 1);
      end
    end

    n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (n < L) begin
      @(negedge clk);
      in_valid = (n < L/2) ? 1'b1 : (($urandom % 4) != 0);
      if (!in_valid) stalls++;
      if (in_valid) begin
        sd_in = 5'(xs[n]);
        strobe_cyc[n] = cyc + 1;
        n++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);

    $display("cic outputs=%0d nrc outputs=%0d stalls=%0d integrator wraps=%0d truncations=%0d settled steps=%0d max CIC truncation error=%0d LSB",
             n_cic, n_nrc, stalls, wraps, trunc_drops, steps_settled, max_err);
    checks += 7;
    if (n_cic != L / 16)    begin failures++; $display("CIC output count %0d", n_cic); end
    if (n_nrc != L / 8)     begin failures++; $display("NRC output count %0d", n_nrc); end
    if (stalls == 0)        begin failures++; $display("no stall exercised"); end
    if (wraps == 0)         begin failures++; $display("no integrator wrap-around exercised"); end
    if (trunc_drops == 0)   begin failures++; $display("no truncation exercised"); end
    if (steps_settled != 4) begin failures++; $display("settled steps %0d of 4", steps_settled); end
    if (n_cic == 0 || n_nrc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (cic_valid && n_cic < L / 16) begin
      longint e;
      int err;
      e = 0;
      for (int k = 0; k < HL16; k++) if (16*n_cic + 10 - k >= 0) e += h16[k] * longint'(xs[16*n_cic + 10 - k]);
      checks += 3;
      if (cic_out !== 16'(cic_model[n_cic])) begin
        failures++;
        if (failures < 10) $display("CIC out %0d = %h expected %h", n_cic, cic_out, cic_model[n_cic]);
      end
      err = int'((longint'($signed(cic_out)) * 512 - e) / 512);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      if (err > TOL) begin failures++; $display("CIC out %0d error %0d LSB", n_cic, err); end
      if (cyc != strobe_cyc[16*n_cic + 15] + 1) begin
        failures++;
        if (failures < 10) $display("CIC out %0d late: cycle %0d", n_cic, cyc);
      end
      // Settled step (Fig. 7 style): outputs 156 and 188 lie inside the steps.
      if (n_cic == 156 || n_cic == 188) begin
        int target;
        target = (n_cic == 156) ? 15 * 2048 : -15 * 2048;
        checks++;
        if (int'($signed(cic_out)) - target <= STEP_TOL && int'($signed(cic_out)) - target >= -STEP_TOL) steps_settled++;
        else begin failures++; $display("CIC step at out %0d = %0d", n_cic, $signed(cic_out)); end
      end
      n_cic++;
    end
    if (nrc_valid && n_nrc < L / 8) begin
      longint e;
      e = 0;
      for (int k = 0; k < HL8; k++) if (8*n_nrc + 7 - k >= 0) e += h8[k] * longint'(xs[8*n_nrc + 7 - k]);
      checks += 2;
      if (longint'($signed(nrc_out)) != e) begin
        failures++;
        if (failures < 10) $display("NRC out %0d = %0d expected %0d", n_nrc, $signed(nrc_out), e);
      end
      if (cyc != strobe_cyc[8*n_nrc + 7] + 14) begin
        failures++;
        if (failures < 10) $display("NRC out %0d late: cycle %0d", n_nrc, cyc);
      end
      if (n_nrc == 312 || n_nrc == 376) begin
        checks++;
        if (longint'($signed(nrc_out)) == ((n_nrc == 312) ? 15 : -15) * 32768) steps_settled++;
        else begin failures++; $display("NRC step at out %0d = %0d", n_nrc, $signed(nrc_out)); end
      end
      n_nrc++;
    end
  end
endmodule
