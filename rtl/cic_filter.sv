// cic_filter: five-stage truncated, pipelined recursive comb (CIC)
// decimator, H(z) = ((1 - z^-RM) / (1 - z^-1))^N with N = 5, M = 1, R = 16.
//
// Structure (input to output):
//   a_in -> integrator 1 (25 b) -> 2 (22 b) -> 3 (20 b) -> 4 (18 b)
//        -> 5 (16 b) -> down-sampler by R -> comb 1..5 (16 b) -> s_out
// All integrators run at the input rate, one step per in_valid strobe. The
// combs run at the rate fs/R, one step per down-sampler tick.
//
// Truncation: every register is aligned on the same MSB, weight 2^(INT_W[0]-1)
// = 2^24. Going from one integrator to the next narrower one, the
// least-significant bits are dropped: the top INT_W[k] bits of the previous
// register are taken, an arithmetic shift right that rounds toward minus
// infinity. The comb section takes the top COMB_W bits of integrator 5.
// s_out is therefore the full-precision 25-bit result divided by 2^9, plus
// the truncation error. Wrap-around in the integrators is harmless, because
// the final result fits in 25 bits: (RM)^N * 2^(B_IN-1) = 2^24.
//
// Pipelining: each integrator's register is in the forward path after its
// adder, so the integrator chain is pipelined without extra registers.
// The comb chain is combinational between the hold register of the
// down-sampler and the output register.
//
// Interface/timing: a_in is a two's complement word, sampled when in_valid
// is high. out_valid pulses once per R strobes, and s_out holds the new
// value from then until the next pulse. With in_valid always high, the
// output for decimation index m (m = 0, 1, ...) is
//   sum_k h[k] * a_in[16m + 10 - k]    (truncated),
// where h are the coefficients of (sum_{k<16} z^-k)^5. out_valid goes high
// on the clock edge after the one that takes sample 16m + 15, whatever the
// gaps in the strobe.
//
// From the paper: N, M, R, the widths 25/22/20/18/16, the 16-bit combs, the
// pipelined integrators and the MCLA adders. This design's choices: the
// 5-bit input (derived from the 25-bit first stage), LSB removal by taking
// the top bits, the strobe and reset, and the output register.
module cic_filter
  import comb_pkg::*;
#(
  parameter int unsigned N      = CIC_N,
  parameter int unsigned R      = CIC_R,
  parameter int unsigned M      = CIC_M,
  parameter int unsigned B_IN   = CIC_B_IN,
  parameter int unsigned INT_W [N] = CIC_INT_W,
  parameter int unsigned COMB_W = CIC_COMB_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [B_IN-1:0]   a_in,
  output logic [COMB_W-1:0] s_out,
  output logic              out_valid
);

  localparam int unsigned BMAX = INT_W[0];

  // Widths must not grow along the chain, and the comb section must not be
  // wider than the last integrator.
  for (genvar k = 1; k < N; k++) begin : g_chk
    if (INT_W[k] > INT_W[k-1]) begin : g_err
      $error("cic_filter: INT_W must be non-increasing");
    end
  end
  if (COMB_W > INT_W[N-1]) begin : g_err_comb
    $error("cic_filter: COMB_W must not exceed the last integrator width");
  end
  if (B_IN > BMAX) begin : g_err_in
    $error("cic_filter: B_IN must not exceed INT_W[0]");
  end

  // Integrator outputs, each left-aligned in BMAX bits (low bits zero).
  logic [BMAX-1:0] int_q [N];

  for (genvar k = 0; k < N; k++) begin : g_int
    localparam int unsigned W = INT_W[k];
    logic [W-1:0] x, y;
    if (k == 0) begin : g_first
      // Sign-extend the input word to the first integrator's width.
      assign x = W'($signed(a_in));
    end else begin : g_next
      // Drop the LSBs the narrower register does not keep.
      assign x = int_q[k-1][BMAX-1 -: W];
    end
    cic_integrator #(.W(W)) u_int (
      .clk(clk), .rst_n(rst_n), .en(in_valid), .x(x), .y(y)
    );
    assign int_q[k] = BMAX'(y) << (BMAX - W);
  end

  // Down-sampler by R.
  logic [COMB_W-1:0] ds_y;
  logic              ds_tick;

  cic_downsampler #(.R(R), .W(COMB_W)) u_ds (
    .clk(clk), .rst_n(rst_n), .en(in_valid),
    .x(int_q[N-1][BMAX-1 -: COMB_W]), .y(ds_y), .tick(ds_tick)
  );

  // Comb chain at the low rate.
  logic [COMB_W-1:0] comb_x [N+1];
  assign comb_x[0] = ds_y;

  for (genvar k = 0; k < N; k++) begin : g_comb
    cic_comb #(.W(COMB_W), .M(M)) u_comb (
      .clk(clk), .rst_n(rst_n), .en(ds_tick), .x(comb_x[k]), .y(comb_x[k+1])
    );
  end

  // Output register: holds each decimated result for R input samples.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= ds_tick;
      if (ds_tick) s_out <= comb_x[N];
    end
  end

  // With R > 1 two decimated results are never on adjacent clocks.
  if (R > 1) begin : g_rate_chk
    a_out_rate: assert property (
      @(posedge clk) disable iff (!rst_n) out_valid |=> !out_valid)
      else $error("cic_filter: output strobe on two adjacent clocks");
  end

endmodule
