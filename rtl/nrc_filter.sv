// nrc_filter: pipelined non-recursive comb decimator by R = 2^M,
// H(z) = (sum_{i<R} z^-i)^N = prod_{i<M} (1 + z^-(2^i))^N, with
// M = 3 stages, N = 5 and R = 8.
//
// Each stage (nrc_stage) is N pipelined (1 + z^-1) blocks followed by
// down-sampling by 2. The word grows by N bits per stage, 5 -> 10 -> 15 ->
// 20 bits. There is no truncation and no recursive loop. Stage k works at
// fs/2^(k-1), so the widest adders run at the lowest rate. Every (1+z^-1)
// block is an MCLA followed by a register, 15 MCLAs in all.
//
// Interface/timing: x_in is two's complement, sampled when in_valid is
// high. out_valid pulses once per R accepted samples; y_out is valid while
// out_valid is high and holds until the next result. Output m (m = 0, 1,
// ...) is
//   y_out[m] = sum_k h[k] * x_in[8m + 7 - k],
// where h are the coefficients of (sum_{i<8} z^-i)^5. Every block adds one
// clock, so out_valid goes high M*N - 1 = 14 clock edges after the edge
// that takes sample 8m + 7, whatever the gaps in the strobe.
// Stage count, order, widths and pipelining follow the paper. The strobes,
// the reset and the down-sampling phase are this design's choices.
module nrc_filter
  import comb_pkg::*;
#(
  parameter int unsigned C_IN = NRC_C_IN,
  parameter int unsigned N    = NRC_N,
  parameter int unsigned M    = NRC_M
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [C_IN-1:0]     x_in,
  output logic [C_IN+M*N-1:0] y_out,
  output logic                out_valid
);

  localparam int unsigned WOUT = C_IN + M * N;

  logic [WOUT-1:0] sx [M+1];
  logic            sv [M+1];

  assign sx[0] = WOUT'(x_in);
  assign sv[0] = in_valid;

  for (genvar k = 0; k < M; k++) begin : g_stage
    localparam int unsigned WI = C_IN + k * N;
    logic [WI+N-1:0] ys;
    nrc_stage #(.W_IN(WI), .N(N)) u_stage (
      .clk(clk), .rst_n(rst_n),
      .in_valid(sv[k]), .x(sx[k][WI-1:0]),
      .out_valid(sv[k+1]), .y(ys)
    );
    assign sx[k+1] = WOUT'(ys);
  end

  assign y_out     = sx[M];
  assign out_valid = sv[M];

endmodule
