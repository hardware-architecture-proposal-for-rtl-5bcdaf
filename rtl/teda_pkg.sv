// teda_pkg: constants shared by the TEDA anomaly-detection pipeline.
//
// The pipeline works on IEEE-754 style floating-point words of
// 1 + EW + MW bits (sign, biased exponent, fraction). The defaults select
// binary32. The iteration counter k is an unsigned KW-bit integer.
// N_DEFAULT is the length of the sample vector x_k (two process variables
// in the validation set-up), and M2_DEFAULT the floating-point value of m^2
// for the Chebyshev-style threshold (m^2+1)/(2k) with m = 3.
// The word width, the counter width and the m^2 encoding are choices of this
// design; N = 2 and m = 3 are the values used for validation.
package teda_pkg;

  localparam int unsigned FP_EW = 8;     // exponent bits
  localparam int unsigned FP_MW = 23;    // fraction bits
  localparam int unsigned FP_W  = 1 + FP_EW + FP_MW;
  localparam int unsigned K_W   = 32;    // width of the iteration counter k
  localparam int unsigned N_DEFAULT = 2; // elements per sample vector

  localparam logic [FP_W-1:0] M2_DEFAULT = 32'h4110_0000;  // 9.0 = m^2 for m = 3

endpackage
