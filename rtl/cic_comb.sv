// cic_comb: one comb cell 1 - z^-M of the CIC decimator, at the low rate.
//
// The output is the present low-rate input minus the input M low-rate
// samples earlier: y = x - x_delayed. The difference comes from a W-bit
// modified carry look-ahead adder (mcla) used as a subtractor
// (x + ~x_delayed + 1). The only registers are the M-word delay line. It
// shifts on en, the decimated-sample tick, so the cell has no forward
// register: the comb section is not pipelined, as in the paper.
//
// Timing: y is combinational and valid while en is high. At that clock
// edge the delay line takes x. Arithmetic is two's complement modulo 2^W.
// Reset clears the delay line. That reset, and the use of the MCLA for the
// comb subtraction, are this design's choices.
module cic_comb #(
  parameter int unsigned W = 16,
  parameter int unsigned M = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);

  logic [W-1:0] dly [M];
  logic         unused_cout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) dly[i] <= '0;
    end else if (en) begin
      dly[0] <= x;
      for (int i = 1; i < int'(M); i++) dly[i] <= dly[i-1];
    end
  end

  mcla #(.W(W)) u_sub (.a(x), .b(~dly[M-1]), .cin(1'b1), .s(y), .cout(unused_cout));

endmodule
