// nrc_stage: one stage of the non-recursive comb decimator, (1 + z^-1)^N
// followed by down-sampling by 2.
//
// N pipelined (1 + z^-1) blocks (nrc_block) are cascaded; block i is
// W_IN + i bits wide at its input. The word grows from W_IN to W_IN + N
// bits across the stage, as the paper's C, C+N, C+2N, ... widths say. A
// phase flag then passes every second filtered sample. Only those samples
// reach the next stage, which thus runs at half this stage's rate.
//
// Interface/timing: x is sampled when in_valid is high. Each block adds one
// clock of latency. The stage output is the last block's register, so
// out_valid is high N - 1 clock edges after the edge that takes every
// second input sample, counting from the second after reset. The phase kept is this
// design's choice.
module nrc_stage #(
  parameter int unsigned W_IN = 5,
  parameter int unsigned N    = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [W_IN-1:0]   x,
  output logic              out_valid,
  output logic [W_IN+N-1:0] y
);

  // Block i's output is W_IN+i+1 bits; every tap is carried in the widest
  // width and sliced to the width each block uses.
  localparam int unsigned WMAX = W_IN + N;

  logic [WMAX-1:0] tap   [N+1];
  logic            tap_v [N+1];

  assign tap[0]   = WMAX'(x);
  assign tap_v[0] = in_valid;

  for (genvar i = 0; i < N; i++) begin : g_blk
    localparam int unsigned WI = W_IN + i;
    logic [WI:0] yb;
    nrc_block #(.W_IN(WI)) u_blk (
      .clk(clk), .rst_n(rst_n),
      .in_valid(tap_v[i]), .x(tap[i][WI-1:0]),
      .out_valid(tap_v[i+1]), .y(yb)
    );
    assign tap[i+1] = WMAX'(yb);
  end

  // Down-sampler by 2: keep the 2nd, 4th, ... filtered sample.
  logic phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        phase <= 1'b0;
    else if (tap_v[N]) phase <= ~phase;
  end

  assign out_valid = tap_v[N] & phase;
  assign y         = tap[N];

endmodule
