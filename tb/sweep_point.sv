// sweep_point: checks one decimation factor R = 2^LOG2R for both
// decimators, as part of decimation_sweep_tb.
//
// The CIC is built untruncated, with N = 5, M = 1 and every register
// 5*LOG2R + 5 bits, the full width of equation (4). The non-recursive
// filter is built with M = LOG2R stages of N = 5. Both get the same random
// 5-bit stream, a run of +15 words included. Every output is compared
// with the direct FIR result sum_k h[k] x[R*m + off - k], where
// h = (sum_{i<R} z^-i)^5, off = R - 6 for the CIC and R - 1 for the
// non-recursive filter. Each check is added to checks; each mismatch to
// failures. done rises when NOUT outputs of each filter were checked.
module sweep_point #(
  parameter int LOG2R = 6,
  parameter int NOUT  = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int R = 1 << LOG2R;
  localparam int W = 5 * LOG2R + 5;
  localparam int HLEN = 5 * (R - 1) + 1;
  localparam int L = R * (NOUT + 1);
  localparam int unsigned IW [5] = '{W, W, W, W, W};

  logic in_valid = 0;
  logic [4:0] x_in = '0;
  logic [W-1:0] cic_y, nrc_y;
  logic cic_v, nrc_v;
  int xs [L];
  longint h [HLEN];
  int n_cic = 0, n_nrc = 0;

  cic_filter #(.R(R), .INT_W(IW), .COMB_W(W)) u_cic (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a_in(x_in),
    .s_out(cic_y), .out_valid(cic_v));

  nrc_filter #(.M(LOG2R)) u_nrc (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in),
    .y_out(nrc_y), .out_valid(nrc_v));

  function automatic longint fir(int m, int off);
    longint e;
    e = 0;
    for (int k = 0; k < HLEN; k++)
      if (R*m + off - k >= 0 && R*m + off - k < L) e += h[k] * longint'(xs[R*m + off - k]);
    return e;
  endfunction

  initial begin
    longint run [HLEN];
    checks = 0;
    failures = 0;
    done = 0;
    // h: five passes of a running sum over R taps.
    for (int k = 0; k < HLEN; k++) h[k] = (k == 0) ? 1 : 0;
    for (int s = 0; s < 5; s++) begin
      longint acc;
      acc = 0;
      for (int k = 0; k < HLEN; k++) begin
        acc += h[k];
        if (k - R >= 0) acc -= run[k - R];
        run[k] = h[k];
        h[k] = acc;
      end
    end
    for (int i = 0; i < L; i++)
      xs[i] = (i >= 2 * R && i < 4 * R) ? 15 : int'($urandom % 31) - 15;
    @(posedge rst_n);
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      in_valid = 1;
      x_in = 5'(xs[i]);
    end
    @(negedge clk) in_valid = 0;
  end

  always @(posedge clk) begin
    #1;
    if (cic_v && n_cic < NOUT) begin
      checks++;
      if (cic_y !== W'(fir(n_cic, R - 6))) begin
        failures++;
        $display("R=%0d CIC out %0d = %0d expected %0d", R, n_cic, $signed(cic_y), fir(n_cic, R - 6));
      end
      n_cic++;
    end
    if (nrc_v && n_nrc < NOUT) begin
      checks++;
      if (nrc_y !== W'(fir(n_nrc, R - 1))) begin
        failures++;
        $display("R=%0d NRC out %0d = %0d expected %0d", R, n_nrc, $signed(nrc_y), fir(n_nrc, R - 1));
      end
      n_nrc++;
    end
    done <= (n_cic >= NOUT) && (n_nrc >= NOUT);
  end
endmodule
