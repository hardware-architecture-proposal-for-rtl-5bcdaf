// teda_outlier_tb: checks OUTLIER against a binary32 model.
// xi is combinational, k is delayed two cycles inside. In cycle c:
//   zeta = xi / 2, threshold = (m^2 + 1) / (2 k(c-2)),
//   outlier = zeta > threshold, out_valid = xi_valid.
// With m = 3 the threshold must be exactly 5/k. xi values are drawn around
// twice the threshold so both classifications occur; NaN must give 0.
module teda_outlier_tb;
  import teda_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] k, xi, zeta, threshold;
  logic xi_valid, outlier, out_valid;
  logic [31:0] k1, k2, thr_m;
  bit o_m;
  int checks = 0, failures = 0, n_out = 0, n_norm = 0;

  teda_outlier dut (.clk(clk), .rst_n(rst_n), .k(k), .xi(xi), .xi_valid(xi_valid),
    .zeta(zeta), .threshold(threshold), .outlier(outlier), .out_valid(out_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    k = 1; xi = 0; xi_valid = 0; k1 = 1; k2 = 0;  // k = 1 is clocked in once after reset
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      k = 1 + ($urandom % 60000);
      xi_valid = 1'($urandom);
      thr_m = f_div(f_add(32'h4110_0000, 32'h3F80_0000), f_mul(f_u2f(k2), 32'h4000_0000));
      case (c % 10)
        0: xi = 32'h7FC0_0000;                          // NaN
        1: xi = f_mul(thr_m, 32'h4000_0000);            // exactly on the threshold
        default: xi = to_f32(from_f32(thr_m) * 2.0 * (0.5 + real'($urandom % 1000) / 1000.0));
      endcase
      #1;
      o_m = f_gt(f_div(xi, 32'h4000_0000), thr_m);
      if (o_m) n_out++; else n_norm++;
      checks += 4;
      if (!same(zeta, f_div(xi, 32'h4000_0000))) begin failures++; $display("FAIL zeta %h", zeta); end
      if (!same(threshold, thr_m)) begin failures++; $display("FAIL thr %h exp %h", threshold, thr_m); end
      if (outlier !== o_m) begin failures++; $display("FAIL outlier %b xi=%h k2=%0d", outlier, xi, k2); end
      if (out_valid !== xi_valid) begin failures++; $display("FAIL out_valid"); end
      // m = 3: threshold = 5/k
      if (k2 != 0) begin
        checks++;
        if (threshold !== to_f32(5.0 / real'(k2))) begin failures++; $display("FAIL 5/k, k=%0d", k2); end
      end
      k2 = k1; k1 = k;
    end
    checks++;
    if (n_out == 0 || n_norm == 0) begin failures++; $display("FAIL only one class seen"); end
    $display("outliers %0d normals %0d", n_out, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
