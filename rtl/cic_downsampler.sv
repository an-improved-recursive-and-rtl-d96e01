// cic_downsampler: down-sampler by R between the integrator and the comb
// sections of the CIC decimator.
//
// A modulo-R counter counts input strobes (en). On the strobe where the
// counter reads R-1, the current input word is copied into a hold register
// and tick is raised for one clock. The comb section then works on y at the
// low rate, one word per R input samples, and y stays steady in between.
//
// Timing: y and tick change on the same clock edge; tick is high for
// exactly one cycle per R strobes. The kept phase (the R-th, 2R-th, ...
// strobe after reset) and the hold register are this design's choices.
module cic_downsampler #(
  parameter int unsigned R = 16,
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] x,
  output logic [W-1:0] y,
  output logic         tick
);

  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;
  localparam logic [CW-1:0] LAST = CW'(R - 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      y    <= '0;
      tick <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (en) begin
        if (cnt == LAST) begin
          cnt  <= '0;
          y    <= x;
          tick <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // A tick is only ever the result of an accepted input sample.
  a_tick_after_strobe: assert property (
    @(posedge clk) disable iff (!rst_n) tick |-> $past(en))
    else $error("cic_downsampler: tick without a preceding strobe");

endmodule
