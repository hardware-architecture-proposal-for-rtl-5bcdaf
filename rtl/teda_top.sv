// teda_top: streaming TEDA anomaly detector, the complete pipeline.
//
// One sample vector x_k of N floating-point elements may enter per clock
// (in_valid = 1). teda_counter supplies the iteration number k; N MEAN lanes
// update mu_k; VARIANCE updates [sigma^2]_k one cycle later and hands
// ||x_k - mu_k||^2 and 1/k on; ECCENTRICITY computes xi_k and OUTLIER
// compares xi_k/2 with (m^2+1)/(2k) in the cycle after that.
// Timing: a sample accepted at clock edge t produces outlier, xi, zeta,
// threshold and k_out with out_valid = 1 in the cycle after edge t+2, i.e.
// three clock periods after it was applied (the paper's initial delay of
// 3 t_c) and then one result per clock.
// Ports are plain: x is an unpacked array of words. Everything in the data
// path follows the paper's block diagrams; in_valid/out_valid, reset and the
// number format are this design's.
module teda_top #(
  parameter int unsigned N  = teda_pkg::N_DEFAULT,
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW,
  parameter logic [EW+MW:0] M2 = teda_pkg::M2_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [EW+MW:0] x [N],
  output logic           out_valid,
  output logic           outlier,
  output logic [EW+MW:0] xi,
  output logic [EW+MW:0] zeta,
  output logic [EW+MW:0] threshold,
  output logic [KW-1:0]  k_out
);
  logic [KW-1:0]  k;
  logic [EW+MW:0] mu [N];
  logic [EW+MW:0] var_s, sqdist, inv_k;
  logic           dist_valid, xi_valid;
  logic [KW-1:0]  k_p1, k_p2;

  teda_counter #(.KW(KW)) u_counter (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k));

  for (genvar n = 0; n < int'(N); n++) begin : g_mean
    teda_mean #(.KW(KW), .EW(EW), .MW(MW)) u_mean (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k), .x(x[n]), .mu(mu[n]));
  end

  teda_variance #(.N(N), .KW(KW), .EW(EW), .MW(MW)) u_variance (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k), .x(x), .mu(mu),
    .var_out(var_s), .sqdist(sqdist), .inv_k(inv_k), .dist_valid(dist_valid));

  teda_eccentricity #(.KW(KW), .EW(EW), .MW(MW)) u_ecc (
    .clk(clk), .rst_n(rst_n), .k(k), .var_in(var_s), .sqdist(sqdist), .inv_k(inv_k),
    .dist_valid(dist_valid), .xi(xi), .xi_valid(xi_valid));

  teda_outlier #(.KW(KW), .EW(EW), .MW(MW), .M2(M2)) u_outlier (
    .clk(clk), .rst_n(rst_n), .k(k), .xi(xi), .xi_valid(xi_valid),
    .zeta(zeta), .threshold(threshold), .outlier(outlier), .out_valid(out_valid));

  // k of the sample at the output, for the user's bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_p1 <= '0; k_p2 <= '0;
    end else begin
      k_p1 <= k;
      k_p2 <= k_p1;
    end
  end
  assign k_out = k_p2;
endmodule
