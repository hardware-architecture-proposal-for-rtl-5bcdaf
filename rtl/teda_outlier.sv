// teda_outlier: OUTLIER module, classifies the sample as normal or abnormal.
//
// Normalises the eccentricity, zeta = xi / 2 (ODIV1), forms the threshold
// (m^2 + 1) / (2k) from the stored constant m^2 (CONST, OSUM1), the twice
// delayed k (OREG1, OREG2, OMULT1 by 2) and ODIV2, and flags an outlier when
// zeta > threshold (OCOMP1). With the default m = 3 the threshold is 5/k.
// OREG1/OREG2 bring k into step with xi, which is two cycles behind the
// system input; outlier, zeta and threshold are combinational in that
// cycle. out_valid passes the ECCENTRICITY valid flag through (this design's
// addition). A NaN xi (first sample) gives outlier = 0.
// M2 holds m^2 as a floating-point word, so m need not be an integer.
module teda_outlier #(
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW,
  parameter logic [EW+MW:0] M2 = teda_pkg::M2_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [KW-1:0]  k,
  input  logic [EW+MW:0] xi,
  input  logic           xi_valid,
  output logic [EW+MW:0] zeta,
  output logic [EW+MW:0] threshold,
  output logic           outlier,
  output logic           out_valid
);
  localparam logic [EW+MW:0] FP_ONE = {2'b00, {(EW-1){1'b1}}, {MW{1'b0}}};
  localparam logic [EW+MW:0] FP_TWO = {2'b01, {(EW-1){1'b0}}, {MW{1'b0}}};

  logic [KW-1:0]  k1, k2;              // OREG1, OREG2
  logic [EW+MW:0] k_f, two_k, m2p1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k1 <= '0; k2 <= '0;
    end else begin
      k1 <= k;
      k2 <= k1;
    end
  end

  uint_to_fp #(.KW(KW), .EW(EW), .MW(MW)) u_kf    (.u(k2), .y(k_f));
  fp_div     #(.EW(EW), .MW(MW))          u_odiv1  (.a(xi), .b(FP_TWO), .y(zeta));
  fp_add     #(.EW(EW), .MW(MW))          u_osum1  (.a(M2), .b(FP_ONE), .sub(1'b0), .y(m2p1));
  fp_mul     #(.EW(EW), .MW(MW))          u_omult1 (.a(k_f), .b(FP_TWO), .y(two_k));
  fp_div     #(.EW(EW), .MW(MW))          u_odiv2  (.a(m2p1), .b(two_k), .y(threshold));
  fp_cmp_gt  #(.EW(EW), .MW(MW))          u_ocomp1 (.a(zeta), .b(threshold), .gt(outlier));

  assign out_valid = xi_valid;
endmodule
