// teda_kratio: the '(k-1)/k' box of the MEAN and VARIANCE modules.
//
// Converts k-1 and k to floating point and divides them, giving the weight
// of the previous mean or variance in the recursive updates
// mu_k = (k-1)/k mu_{k-1} + x_k/k and
// s_k = (k-1)/k s_{k-1} + ||x_k - mu_k||^2 / k. For k = 1 the result is 0.
// Combinational. The paper draws this box without its insides; the
// conversion-plus-division is this design's.
module teda_kratio #(
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic [KW-1:0]  k,
  output logic [EW+MW:0] ratio
);
  logic [EW+MW:0] km1_f, k_f;

  uint_to_fp #(.KW(KW), .EW(EW), .MW(MW)) u_km1 (.u(k - 1'b1), .y(km1_f));
  uint_to_fp #(.KW(KW), .EW(EW), .MW(MW)) u_k   (.u(k),        .y(k_f));
  fp_div     #(.EW(EW), .MW(MW))          u_div (.a(km1_f), .b(k_f), .y(ratio));
endmodule
