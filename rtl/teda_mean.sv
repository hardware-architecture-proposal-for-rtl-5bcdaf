// teda_mean: MEAN module, the recursive mean of one element of x_k.
//
// One instance serves one element n of the sample vector; the top holds N
// of them. It computes
//     mu_k = x_k                               for k = 1
//     mu_k = (k-1)/k * mu_{k-1} + (1/k) * x_k  for k > 1
// following the paper's MEAN diagram: MCOMPn compares k with the constant
// MCONST = 1, MMUXn selects x_k on the first iteration and the update
// otherwise, MREGn holds mu, MMULT1n weighs the stored mean by (k-1)/k,
// MDIVn forms 1/k, MMULT2n weighs x_k and MSUMn adds the two.
// Timing: x and k are sampled at the clock edge that accepts the sample, so
// mu (the Q output of MREGn) holds mu_k from the next cycle on. The whole
// update is one combinational path between two edges.
// MREGn loads only while in_valid is 1 (this design's data-valid qualifier;
// the paper streams one sample per clock) and resets to 0, the paper's mu_0.
module teda_mean #(
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [KW-1:0]  k,
  input  logic [EW+MW:0] x,
  output logic [EW+MW:0] mu
);
  localparam logic [EW+MW:0] FP_ONE = {2'b00, {(EW-1){1'b1}}, {MW{1'b0}}};

  logic           first;                    // MCOMPn
  logic [EW+MW:0] kratio, inv_k;            // (k-1)/k box, MDIVn
  logic [EW+MW:0] k_f;
  logic [EW+MW:0] p_old, p_new, upd, d_mux; // MMULT1n, MMULT2n, MSUMn, MMUXn

  assign first = (k == KW'(1));

  teda_kratio #(.KW(KW), .EW(EW), .MW(MW)) u_kratio (.k(k), .ratio(kratio));
  uint_to_fp  #(.KW(KW), .EW(EW), .MW(MW)) u_kf     (.u(k), .y(k_f));
  fp_div      #(.EW(EW), .MW(MW)) u_mdiv   (.a(FP_ONE), .b(k_f),    .y(inv_k));
  fp_mul      #(.EW(EW), .MW(MW)) u_mmult1 (.a(mu),     .b(kratio), .y(p_old));
  fp_mul      #(.EW(EW), .MW(MW)) u_mmult2 (.a(x),      .b(inv_k),  .y(p_new));
  fp_add      #(.EW(EW), .MW(MW)) u_msum   (.a(p_old),  .b(p_new),  .sub(1'b0), .y(upd));

  assign d_mux = first ? x : upd;

  always_ff @(posedge clk or negedge rst_n) begin   // MREGn
    if (!rst_n)        mu <= '0;
    else if (in_valid) mu <= d_mux;
  end
endmodule
