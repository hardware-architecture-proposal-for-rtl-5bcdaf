// teda_eccentricity: ECCENTRICITY module, xi_k = 1/k + sqdist / (k [sigma^2]_k).
//
// Reuses what VARIANCE already computed. EREG3 and EREG4 register
// sqdist = ||x_k - mu_k||^2 and 1/k; EREG1 and EREG2 delay the system's k by
// two cycles; the variance input comes straight from VARIANCE's VREG1. All
// three then belong to the same sample. EMULT1 forms k [sigma^2]_k, EDIV1
// divides sqdist by it and ESUM1 adds 1/k. xi is combinational from these
// registers, so it is valid two cycles after the sample entered the system,
// as is the OUTLIER decision that follows it in the same cycle.
// For k = 1 the variance is 0 and xi is NaN (0/0); the eccentricity formula
// is defined only for a positive variance, and the comparator downstream
// classifies NaN as normal. The valid flag register is this design's.
module teda_eccentricity #(
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [KW-1:0]  k,
  input  logic [EW+MW:0] var_in,
  input  logic [EW+MW:0] sqdist,
  input  logic [EW+MW:0] inv_k,
  input  logic           dist_valid,
  output logic [EW+MW:0] xi,
  output logic           xi_valid
);
  logic [KW-1:0]  k1, k2;        // EREG1, EREG2
  logic [EW+MW:0] sqdist_r, invk_r; // EREG3, EREG4
  logic [EW+MW:0] k_f, kvar, q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k1 <= '0; k2 <= '0; sqdist_r <= '0; invk_r <= '0; xi_valid <= 1'b0;
    end else begin
      k1       <= k;
      k2       <= k1;
      sqdist_r   <= sqdist;
      invk_r   <= inv_k;
      xi_valid <= dist_valid;
    end
  end

  uint_to_fp #(.KW(KW), .EW(EW), .MW(MW)) u_kf    (.u(k2), .y(k_f));
  fp_mul     #(.EW(EW), .MW(MW))          u_emult1 (.a(var_in), .b(k_f), .y(kvar));
  fp_div     #(.EW(EW), .MW(MW))          u_ediv1  (.a(sqdist_r), .b(kvar), .y(q));
  fp_add     #(.EW(EW), .MW(MW))          u_esum1  (.a(q), .b(invk_r), .sub(1'b0), .y(xi));
endmodule
