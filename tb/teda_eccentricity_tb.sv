// teda_eccentricity_tb: checks ECCENTRICITY against a binary32 model.
// Inputs change every cycle. xi in cycle c must equal
//   sqdist(c-1) / (var(c) * k(c-2)) + inv_k(c-1)
// bit for bit (sqdist and 1/k pass one register, k two, the variance none),
// and xi_valid must be dist_valid delayed by one cycle. A zero variance
// (first sample) must give NaN.
module teda_eccentricity_tb;
  import teda_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] k, var_in, sqdist, inv_k, xi;
  logic dist_valid, xi_valid;
  logic [31:0] k1, k2, d1, i1;
  bit v1;
  int checks = 0, failures = 0, nan_seen = 0;

  teda_eccentricity dut (.clk(clk), .rst_n(rst_n), .k(k), .var_in(var_in), .sqdist(sqdist),
    .inv_k(inv_k), .dist_valid(dist_valid), .xi(xi), .xi_valid(xi_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    k = 0; var_in = 0; sqdist = 0; inv_k = 0; dist_valid = 0;
    k1 = 0; k2 = 0; d1 = 0; i1 = 0; v1 = 0;  // k = 0 is clocked in once after reset
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      k          = 1 + ($urandom % 100000);
      sqdist     = to_f32(real'($urandom % 100000) / 1000.0);
      inv_k      = f_invk(longint'(k));
      dist_valid = 1'($urandom);
      var_in     = (c % 50 == 7) ? 32'h0 : to_f32(real'(1 + $urandom % 100000) / 1000.0);
      #1;
      e = f_add(f_div(d1, f_mul(var_in, f_u2f(k2))), i1);
      if (is_nan(e)) nan_seen++;
      checks++;
      if (!same(xi, e) || xi_valid !== v1) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: xi=%h expected %h (valid %b/%b)", c, xi, e, xi_valid, v1);
      end
      // register model
      k2 = k1; k1 = k; d1 = sqdist; i1 = inv_k; v1 = dist_valid;
    end
    // worked example: k=2, var=d^2/8, sqdist=d^2/4 -> xi = 1/2 + 1 = 1.5
    @(negedge clk); k = 2; sqdist = 32'h3E80_0000; inv_k = 32'h3F00_0000; dist_valid = 1;
    @(negedge clk);
    @(negedge clk); var_in = 32'h3E00_0000; #1;   // 0.125
    checks++;
    if (xi !== 32'h3FC0_0000) begin failures++; $display("FAIL xi(k=2) = %h", xi); end
    checks++;
    if (nan_seen == 0) begin failures++; $display("FAIL zero variance never applied"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
