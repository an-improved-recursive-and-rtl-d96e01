// cic_integrator: one pipelined integrator cell 1/(1-z^-1) of the CIC
// decimator.
//
// On every input strobe (en) the register takes y + x, where the sum comes
// from a W-bit modified carry look-ahead adder (mcla). The register sits in
// the forward path, after the adder, and its output feeds back to the adder.
// The cell's output is therefore the register itself. A chain of these cells
// is pipelined without adding any register, which is the paper's pipelined
// integrator structure.
//
// Arithmetic is two's complement modulo 2^W. The CIC relies on this
// wrap-around: the combs that follow undo any overflow, provided the final
// result fits.
//
// Timing: y after the strobe edge of sample n holds y_old + x[n], so the
// cell adds one sample of latency. Reset is asynchronous and active-low and
// clears y. The strobe and the reset are this design's choice; the paper
// shows only the adder and z^-1.
module cic_integrator #(
  parameter int unsigned W = 25
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);

  logic [W-1:0] sum;
  logic         unused_cout;

  mcla #(.W(W)) u_add (.a(y), .b(x), .cin(1'b0), .s(sum), .cout(unused_cout));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= sum;
  end

endmodule
