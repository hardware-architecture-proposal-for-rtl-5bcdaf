// teda_variance_tb: checks VARIANCE against a binary32 model, cycle by cycle.
// A sample (x, k, valid) applied in cycle c is registered at the following
// edge; in cycle c+1 the block sees the matching mean mu (driven here, as
// MEAN's register would) and must output ||x - mu||^2 and 1/k for it, and
// after the next edge VREG1 must hold the recursive variance:
//   s = 0 (k = 1), s = ||x - mu||^2 * (1/k) + (k-1)/k * s (k > 1).
// Idle cycles must leave the variance unchanged. N = 3 exercises the
// N-input adder chain beyond the default of two elements.
module teda_variance_tb;
  import teda_tb_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] k;
  logic [31:0] x [N], mu [N];
  logic [31:0] var_out, sqdist, inv_k;
  logic dist_valid;
  int checks = 0, failures = 0;

  // model state
  logic [31:0] x_prev [N];
  logic [31:0] k_prev, var_m, d_m, acc;
  bit          v_prev;

  teda_variance #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k), .x(x),
    .mu(mu), .var_out(var_out), .sqdist(sqdist), .inv_k(inv_k), .dist_valid(dist_valid));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] e);
    checks++;
    if (!same(got, e)) begin
      failures++;
      if (failures < 10) $display("FAIL %s k=%0d: got %h expected %h", what, k_prev, got, e);
    end
  endtask

  initial begin
    longint unsigned kk;
    kk = 1; v_prev = 0; var_m = 0; k_prev = 0;
    for (int n = 0; n < N; n++) begin x[n] = 0; mu[n] = 0; x_prev[n] = 0; end
    k = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // the sample registered at the last edge meets its mean now
      for (int n = 0; n < N; n++) mu[n] = to_f32(from_f32(x_prev[n]) + real'(int'($urandom % 2001) - 1000) / 500.0);
      // variance register holds the value after all earlier samples
      expect_eq("var_out", var_out, var_m);
      if (c == 2000) begin   // asynchronous reset in mid stream
        rst_n = 0; #1;
        var_m = 0; v_prev = 0; kk = 1;
        expect_eq("reset var", var_out, 32'h0);
        checks++;
        if (dist_valid !== 1'b0) failures++;
        rst_n = 1;
      end
      // new input sample
      in_valid = ($urandom % 4) != 0;
      k = 32'(kk);
      for (int n = 0; n < N; n++) x[n] = to_f32(real'(int'($urandom % 20001) - 10000) / 1000.0);
      #1;
      checks++;
      if (dist_valid !== v_prev) begin failures++; $display("FAIL dist_valid"); end
      if (v_prev) begin
        acc = 0;
        for (int n = 0; n < N; n++) begin
          d_m = f_sub(x_prev[n], mu[n]);
          acc = (n == 0) ? f_mul(d_m, d_m) : f_add(acc, f_mul(d_m, d_m));
        end
        expect_eq("sqdist", sqdist, acc);
        expect_eq("inv_k", inv_k, f_invk(k_prev));
        var_m = (k_prev == 1) ? 32'h0 : f_add(f_mul(acc, f_invk(k_prev)), f_mul(f_kratio(k_prev), var_m));
      end
      // bookkeeping for the next cycle
      v_prev = in_valid;
      k_prev = k;
      for (int n = 0; n < N; n++) x_prev[n] = x[n];
      if (in_valid) kk++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
