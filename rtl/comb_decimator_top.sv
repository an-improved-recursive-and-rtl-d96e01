// comb_decimator_top: the two comb decimators side by side, fed by one
// sigma-delta modulator output stream.
//
//   sd_in --+--> cic_filter  (recursive, truncated, pipelined, R = 16) --> cic_out
//           +--> nrc_filter  (non-recursive, pipelined,          R = 8)  --> nrc_out
//
// The CIC keeps 16 bits: its full-precision 25-bit result divided by 2^9.
// The non-recursive filter keeps its full 20-bit result. Each output has
// its own strobe. The modulator itself is outside this design, and its
// 5-bit two's complement words enter on sd_in with the strobe in_valid.
//
// The paper designs both filters and compares them. Placing them on one
// shared input is this design's choice, so both can be exercised and
// compared on the same data.
module comb_decimator_top
  import comb_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [CIC_B_IN-1:0]   sd_in,
  output logic [CIC_COMB_W-1:0] cic_out,
  output logic                  cic_valid,
  output logic [NRC_W_OUT-1:0]  nrc_out,
  output logic                  nrc_valid
);

  cic_filter u_cic (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .a_in(sd_in), .s_out(cic_out), .out_valid(cic_valid)
  );

  // Both filters take the same 5-bit word.
  nrc_filter u_nrc (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .x_in(NRC_C_IN'(sd_in)), .y_out(nrc_out), .out_valid(nrc_valid)
  );

endmodule
