// teda_variance: VARIANCE module, the recursive variance of x_k.
//
// Works one cycle behind MEAN. VREG1_n delay the N elements of x_k and VREG2
// delays k, so that they line up with mu_k, which MEAN's registers already
// hold. Then, as in the paper's VARIANCE diagram:
//   VSUBn, VMULT1_n  d_n = x_k^n - mu_k^n, d_n^2
//   VSUM1            sqdist = sum_n d_n^2 = ||x_k - mu_k||^2 (N-input adder)
//   VDIV1            inv_k = 1/k
//   VMULT2, VMULT3   sqdist * 1/k and (k-1)/k * previous variance
//   VSUM2            the updated variance
//   VCOMP1, VMUX1    0 instead of the update when k = 1
//   VREG1            holds [sigma^2]_k
// sqdist and inv_k leave the block combinationally so that ECCENTRICITY does
// not recompute them; they belong to the same sample as the value VREG1
// loads at the end of the cycle. The variance output is VREG1's Q.
// The N-input adder is a chain of two-input adders, element 1 first; the
// valid flag that travels with VREG2 and gates VREG1 is this design's.
// VREG1 resets to 0, the paper's [sigma^2]_0.
module teda_variance #(
  parameter int unsigned N  = teda_pkg::N_DEFAULT,
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [KW-1:0]  k,
  input  logic [EW+MW:0] x  [N],
  input  logic [EW+MW:0] mu [N],
  output logic [EW+MW:0] var_out,
  output logic [EW+MW:0] sqdist,
  output logic [EW+MW:0] inv_k,
  output logic           dist_valid
);
  localparam logic [EW+MW:0] FP_ONE = {2'b00, {(EW-1){1'b1}}, {MW{1'b0}}};

  logic [EW+MW:0] x_d [N];            // VREG1_n
  logic [KW-1:0]  k_d;                // VREG2
  logic           v_d;
  logic [EW+MW:0] diff [N], sq [N];   // VSUBn, VMULT1_n
  logic [EW+MW:0] acc [N];            // VSUM1 chain
  logic [EW+MW:0] k_f, kratio, t_new, t_old, upd, d_mux;
  logic           first;              // VCOMP1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_d <= '0;
      v_d <= 1'b0;
      for (int n = 0; n < int'(N); n++) x_d[n] <= '0;
    end else begin
      k_d <= k;
      v_d <= in_valid;
      for (int n = 0; n < int'(N); n++) x_d[n] <= x[n];
    end
  end

  for (genvar n = 0; n < int'(N); n++) begin : g_lane
    fp_add #(.EW(EW), .MW(MW)) u_vsub   (.a(x_d[n]), .b(mu[n]), .sub(1'b1), .y(diff[n]));
    fp_mul #(.EW(EW), .MW(MW)) u_vmult1 (.a(diff[n]), .b(diff[n]), .y(sq[n]));
    if (n == 0) begin : g_first
      assign acc[0] = sq[0];
    end else begin : g_sum
      fp_add #(.EW(EW), .MW(MW)) u_vsum1 (.a(acc[n-1]), .b(sq[n]), .sub(1'b0), .y(acc[n]));
    end
  end
  assign sqdist = acc[N-1];

  uint_to_fp  #(.KW(KW), .EW(EW), .MW(MW)) u_kf     (.u(k_d), .y(k_f));
  fp_div      #(.EW(EW), .MW(MW))          u_vdiv1  (.a(FP_ONE), .b(k_f), .y(inv_k));
  teda_kratio #(.KW(KW), .EW(EW), .MW(MW)) u_kratio (.k(k_d), .ratio(kratio));
  fp_mul      #(.EW(EW), .MW(MW))          u_vmult2 (.a(sqdist), .b(inv_k), .y(t_new));
  fp_mul      #(.EW(EW), .MW(MW))          u_vmult3 (.a(kratio), .b(var_out), .y(t_old));
  fp_add      #(.EW(EW), .MW(MW))          u_vsum2  (.a(t_new), .b(t_old), .sub(1'b0), .y(upd));

  assign first = (k_d == KW'(1));
  assign d_mux = first ? '0 : upd;    // VMUX1

  always_ff @(posedge clk or negedge rst_n) begin   // VREG1
    if (!rst_n)   var_out <= '0;
    else if (v_d) var_out <= d_mux;
  end

  assign dist_valid = v_d;
endmodule
