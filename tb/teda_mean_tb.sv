// teda_mean_tb: checks one MEAN lane against a binary32 model.
// A random stream with idle cycles is applied; after every clock edge the
// mean register must equal, bit for bit, the model
//   mu = x (k = 1), mu = (k-1)/k * mu + (1/k) * x (k > 1),
// hold its value in idle cycles and return to 0 on reset. Also checks that
// the mean of a constant stream stays that constant (to rounding) and that a long stream
// of 1..K has mean (K+1)/2 to within rounding.
module teda_mean_tb;
  import teda_tb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] k, x, mu, mu_m;
  int checks = 0, failures = 0;

  teda_mean dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k), .x(x), .mu(mu));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what);
    checks++;
    if (!same(mu, mu_m)) begin
      failures++;
      if (failures < 10) $display("FAIL %s k=%0d: mu=%h expected %h", what, k, mu, mu_m);
    end
  endtask

  // one cycle: apply (valid, x), clock, compare
  task automatic step(input bit v, input logic [31:0] xv);
    @(negedge clk);
    in_valid = v; x = xv;
    @(posedge clk);
    if (v) begin
      mu_m = (k == 1) ? xv : f_add(f_mul(mu_m, f_kratio(64'(k))), f_mul(xv, f_invk(64'(k))));
    end
    #1;
    chk("step");
    @(negedge clk);
    if (v) k = k + 1;
    in_valid = 0;
  endtask

  initial begin
    k = 1; x = 0; mu_m = 0;
    repeat (2) @(negedge clk);   // reset is applied at the first edge
    chk("reset");
    rst_n = 1;
    // random stream with gaps
    for (int i = 0; i < 3000; i++)
      step(($urandom % 4) != 0, to_f32(real'($urandom % 20000) / 1000.0 - 10.0));
    // reset in the middle of a stream
    rst_n = 0; #1; mu_m = 0; chk("async reset"); rst_n = 1;
    k = 1;
    // constant stream: mean stays the constant
    for (int i = 0; i < 50; i++) step(1, 32'h40A0_0000);   // 5.0
    checks++;
    // (k-1)/k*mu + x/k is not exact in binary32, so allow a few ulp of drift
    if (!close(from_f32(mu), 5.0, 1.0e-6)) begin failures++; $display("FAIL constant mean %h", mu); end
    // 1..200: mean 100.5
    rst_n = 0; #1; rst_n = 1; k = 1; mu_m = 0;
    for (int i = 1; i <= 200; i++) step(1, to_f32(real'(i)));
    checks++;
    if (!close(from_f32(mu), 100.5, 1.0e-5)) begin
      failures++; $display("FAIL mean of 1..200 = %f", from_f32(mu));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
