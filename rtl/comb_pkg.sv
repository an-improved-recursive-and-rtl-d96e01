// comb_pkg: constants shared by the comb decimators.
//
// The recursive (CIC) decimator uses N = 5 stages, differential delay
// M = 1 and decimation R = 16. Its integrator registers are truncated to
// 25, 22, 20, 18 and 16 bits and the comb section is 16 bits wide. These
// numbers follow the paper's five-stage truncated CIC. The 5-bit input
// width is derived: 25 bits = N*log2(R) + B_IN with N*log2(R) = 20.
//
// The non-recursive decimator uses R = 8 = 2^M with M = 3 stages of
// (1+z^-1)^N, N = 5, a 5-bit input and a 20-bit output, as in the paper.
package comb_pkg;

  // ---- recursive CIC decimator ----
  localparam int unsigned CIC_N      = 5;
  localparam int unsigned CIC_R      = 16;
  localparam int unsigned CIC_M      = 1;
  localparam int unsigned CIC_B_IN   = 5;
  localparam int unsigned CIC_COMB_W = 16;
  // Integrator register widths, integrator 1 first.
  localparam int unsigned CIC_INT_W [CIC_N] = '{25, 22, 20, 18, 16};

  // ---- non-recursive comb decimator ----
  localparam int unsigned NRC_C_IN = 5;   // input word length C
  localparam int unsigned NRC_N    = 5;   // filter order
  localparam int unsigned NRC_M    = 3;   // number of stages, R = 2^M
  localparam int unsigned NRC_W_OUT = NRC_C_IN + NRC_M * NRC_N;  // 20 bits

endpackage
