// decimation_sweep_tb: both decimators at the decimation factors of the
// working-frequency comparison, R = 64, 128, 256 and 512, with N = 5 and a
// 5-bit input. The CIC is untruncated, 35 to 50 bits wide; the non-recursive
// filter has 6 to 9 stages and the same output widths. Each size is one
// sweep_point, which compares every output with the direct FIR result.
// This shows the parameterised RTL is exact at those sizes; the clock
// frequencies of the comparison are timing results that a simulation
// cannot reproduce.
module decimation_sweep_tb;
  logic clk = 0, rst_n = 0;
  logic done [4];
  int   chk [4];
  int   fail [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < 4; i++) begin : g_pt
    sweep_point #(.LOG2R(6 + i), .NOUT(6)) u_pt (
      .clk(clk), .rst_n(rst_n), .done(done[i]), .checks(chk[i]), .failures(fail[i]));
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < 4; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("R=%0d: %0d checks, %0d failures", 64 << i, chk[i], fail[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
