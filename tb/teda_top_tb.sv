// teda_top_tb: end-to-end test of the TEDA pipeline at its default size.
//
// A two-element stream with idle cycles, injected anomalies, a constant
// stretch and an asynchronous reset in mid stream is applied. For every
// accepted sample the testbench expects, exactly three clock periods after
// the sample was applied (the cycle after the second edge following it), one
// output with out_valid = 1 and:
//   - xi, zeta, threshold and outlier equal, bit for bit, a binary32 model
//     that performs the circuit's operations in the circuit's order;
//   - k_out equal to the sample's index;
//   - xi within 1e-3 (relative) of a double-precision evaluation of the
//     recursive equations, and the outlier decision equal to the double
//     one except where zeta lies within 1e-3 of the threshold.
// Out-of-slot out_valid pulses count as failures. It also counts how often
// each mechanism happened - first-sample path (k = 1), outlier, normal
// sample, idle input cycle, reset in mid stream, undefined eccentricity of a
// zero-variance stream - and counts a failure for any that never happened.
module teda_top_tb;
  import teda_tb_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] x [N];
  logic out_valid, outlier;
  logic [31:0] xi, zeta, threshold, k_out;
  int checks = 0, failures = 0;
  int n_first = 0, n_out = 0, n_norm = 0, n_idle = 0, n_reset = 0, n_nan = 0;

  typedef struct {
    longint unsigned k;
    logic [31:0] xi, zeta, thr;
    bit outlier;
    real xi_d, zeta_d, thr_d;
    bit outlier_d;
  } exp_t;

  exp_t pipe [2];        // expectation for the output now and one cycle ahead
  bit   pipe_v [2];
  teda_model m;

  teda_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid),
    .outlier(outlier), .xi(xi), .zeta(zeta), .threshold(threshold), .k_out(k_out));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL t=%0t %s", $time, msg);
  endtask

  // compare the outputs with the expectation for this cycle
  task automatic check_outputs();
    exp_t e;
    checks++;
    if (out_valid !== pipe_v[0]) begin
      fail($sformatf("out_valid=%b expected %b", out_valid, pipe_v[0]));
      return;
    end
    if (!pipe_v[0]) return;
    e = pipe[0];
    checks += 6;
    if (k_out !== 32'(e.k))      fail($sformatf("k_out=%0d expected %0d", k_out, e.k));
    if (!same(xi, e.xi))         fail($sformatf("k=%0d xi=%h expected %h", e.k, xi, e.xi));
    if (!same(zeta, e.zeta))     fail($sformatf("k=%0d zeta=%h expected %h", e.k, zeta, e.zeta));
    if (!same(threshold, e.thr)) fail($sformatf("k=%0d thr=%h expected %h", e.k, threshold, e.thr));
    if (outlier !== e.outlier)   fail($sformatf("k=%0d outlier=%b expected %b", e.k, outlier, e.outlier));
    if (is_nan(e.xi)) n_nan++;
    else if (!close(from_f32(xi), e.xi_d, 1.0e-3))
      fail($sformatf("k=%0d xi=%f double model %f", e.k, from_f32(xi), e.xi_d));
    if (!is_nan(e.xi) && !close(e.zeta_d, e.thr_d, 1.0e-3) && outlier !== e.outlier_d)
      fail($sformatf("k=%0d outlier=%b double model %b", e.k, outlier, e.outlier_d));
    if (e.k == 1) n_first++;
    if (outlier) n_out++; else n_norm++;
  endtask

  // one clock cycle with the given input
  task automatic cycle(input bit v, input real x0, input real x1);
    logic [31:0] xs [];
    exp_t e;
    @(negedge clk);
    in_valid = v;
    x[0] = to_f32(x0);
    x[1] = to_f32(x1);
    #1;
    check_outputs();
    // shift the expectation pipeline
    pipe[0] = pipe[1]; pipe_v[0] = pipe_v[1];
    pipe_v[1] = v;
    if (v) begin
      xs = new[N];
      xs[0] = x[0]; xs[1] = x[1];
      e.k = m.k;
      m.step(xs);
      e.xi = m.xi; e.zeta = m.zeta; e.thr = m.thr; e.outlier = m.outlier;
      e.xi_d = m.xi_d; e.zeta_d = m.zeta_d; e.thr_d = m.thr_d; e.outlier_d = m.outlier_d;
      pipe[1] = e;
    end else n_idle++;
  endtask

  // A sample applied in this cycle is accepted at the next edge and its
  // result is checked two cycles from now: slot 1 now, slot 0 next cycle.
  task automatic do_reset();
    @(negedge clk);
    rst_n = 0;
    in_valid = 0;
    #1;
    checks++;
    if (out_valid !== 1'b0) fail("out_valid during reset");
    m.reset();
    foreach (pipe_v[i]) pipe_v[i] = 0;
    @(negedge clk);
    rst_n = 1;
    n_reset++;
  endtask

  initial begin
    real base0, base1;
    m = new(N, 32'h4110_0000);
    foreach (pipe_v[i]) pipe_v[i] = 0;
    x[0] = 0; x[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1) normal operation with occasional spikes and idle cycles
    for (int i = 0; i < 1500; i++) begin
      base0 = 0.6 + 0.02 * $sin(real'(i) / 40.0) + real'(int'($urandom % 1001) - 500) / 50000.0;
      base1 = 0.3 + 0.01 * $cos(real'(i) / 25.0) + real'(int'($urandom % 1001) - 500) / 50000.0;
      if (i % 300 == 299) begin base0 += 0.3; base1 -= 0.2; end   // anomaly
      cycle(($urandom % 5) != 0, base0, base1);
    end
    // 2) reset in mid stream, then a constant stretch (zero variance),
    //    then a level shift that must be flagged
    do_reset();
    for (int i = 0; i < 20; i++) cycle(1, 1.25, -0.5);
    for (int i = 0; i < 30; i++) cycle(1, 1.25 + real'(i % 3) / 1000.0, -0.5 + real'(i % 2) / 1000.0);
    for (int i = 0; i < 5; i++)  cycle(1, 2.0, 0.5);
    // 3) continuous stream, one sample per clock
    for (int i = 0; i < 500; i++)
      cycle(1, real'(int'($urandom % 2001) - 1000) / 100.0, real'(int'($urandom % 2001) - 1000) / 100.0);
    repeat (3) cycle(0, 0.0, 0.0);   // drain
    $display("first=%0d outlier=%0d normal=%0d idle=%0d reset=%0d undefined_xi=%0d",
             n_first, n_out, n_norm, n_idle, n_reset, n_nan);
    checks++;
    if (n_first < 2 || n_out == 0 || n_norm == 0 || n_idle == 0 || n_reset == 0 || n_nan < 2) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
