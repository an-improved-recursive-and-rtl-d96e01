// nrc_block: one pipelined (1 + z^-1) block of the non-recursive comb
// decimator.
//
// On each input strobe the block adds the present sample to the previous
// one with a modified carry look-ahead adder (mcla), and registers the sum.
// Placing the register after the adder is the paper's pipelining of the
// non-recursive filter. Each block therefore breaks the adder chain. The
// sum is one bit wider than the input, so N blocks in a row grow the word
// by N bits.
//
// Interface/timing: x is two's complement, sampled when in_valid is high.
// One clock later, out_valid is high and y = x[n] + x[n-1], where x[n-1]
// is the sample of the previous strobe (0 after reset). The valid strobe
// travelling with the data and the reset are this design's choices.
module nrc_block #(
  parameter int unsigned W_IN = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [W_IN-1:0] x,
  output logic            out_valid,
  output logic [W_IN:0]   y
);

  logic [W_IN-1:0] x_d;   // z^-1: previous sample
  logic [W_IN:0]   sum;
  logic            unused_cout;

  mcla #(.W(W_IN + 1)) u_add (
    .a   ((W_IN+1)'($signed(x))),
    .b   ((W_IN+1)'($signed(x_d))),
    .cin (1'b0),
    .s   (sum),
    .cout(unused_cout)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_d       <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x_d <= x;
        y   <= sum;
      end
    end
  end

endmodule
