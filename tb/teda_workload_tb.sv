// teda_workload_tb: full-size run of the default pipeline on two
// actuator-fault scenarios shaped like the DAMADICS sugar-plant benchmark.
//
// The benchmark data themselves are not included; the testbench synthesises
// two process variables with the levels and noise of the published plots
// (x1 around 35, x2 around 49) and injects the fault over the sample window
// of each entry of the benchmark's fault list for actuator 1:
//   items 1, 3, 4, 5: bypass valve partly opened (f18), windows
//           58800..59800, 58830..58930, 58520..58625, 54600..54700
//           (x1 rises by 20, x2 by 8, then both relax);
//   items 2, 6: positioner supply pressure drop (f16), windows
//           57275..57550, 56670..56770 (x1 falls by 10, x2 rises by 5);
//   item 7: unexpected pressure drop (f17), 37780..38400 (x1 falls by 12,
//           x2 rises by 6).
// The fault shapes and sizes are this testbench's; only the windows come
// from the benchmark description.
// Each scenario streams one sample per clock from reset until 600 samples
// after its fault window. Every result is compared bit for bit with the
// binary32 model, the number of results must equal the number of samples
// (one per clock) and the first result must appear three clock periods
// after the first sample. Detection is checked against the fault window:
// at least half of the in-window samples must be flagged, and at most 1%
// of the samples between k = 1000 and the window start.
module teda_workload_tb;
  import teda_tb_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] x [N];
  logic out_valid, outlier;
  logic [31:0] xi, zeta, threshold, k_out;
  int checks = 0, failures = 0;

  teda_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid),
    .outlier(outlier), .xi(xi), .zeta(zeta), .threshold(threshold), .k_out(k_out));

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // roughly Gaussian noise with standard deviation s
  function automatic real noise(input real s);
    real acc = 0.0;
    for (int i = 0; i < 4; i++) acc += real'($urandom % 10001) / 10000.0 - 0.5;
    return acc * s * 1.732;
  endfunction

  // fault profile: 0 outside [f0, f1], rising quickly and relaxing inside
  function automatic real bump(input int k, input int f0, input int f1);
    real t;
    if (k < f0 || k > f1) return 0.0;
    t = real'(k - f0) / real'(f1 - f0);
    return (t < 0.1) ? t / 0.1 : 1.0 - 0.4 * (t - 0.1);
  endfunction

  task automatic run(input string name, input int f0, input int f1,
                     input real a1, input real a2);
    teda_model m;
    logic [31:0] xs [];
    int n_samples, n_results, first_result_cycle;
    int in_win, in_win_flag, pre, pre_flag;
    logic [31:0] exp_xi [$], exp_zeta [$], exp_thr [$];
    bit exp_out [$];
    int exp_k [$];
    real slow1 = 0.0, slow2 = 0.0;
    m = new(N, 32'h4110_0000);
    xs = new[N];
    n_samples = f1 + 600;
    n_results = 0; first_result_cycle = -1;
    in_win = 0; in_win_flag = 0; pre = 0; pre_flag = 0;
    @(negedge clk); rst_n = 0; in_valid = 0;
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < n_samples + 3; c++) begin
      @(negedge clk);
      if (c < n_samples) begin
        // slow drift plus noise, then the fault
        slow1 = 0.999 * slow1 + noise(0.08);
        slow2 = 0.999 * slow2 + noise(0.05);
        x[0] = to_f32(35.0 + slow1 + noise(0.8) + a1 * bump(c + 1, f0, f1));
        x[1] = to_f32(49.0 + slow2 + noise(0.5) + a2 * bump(c + 1, f0, f1));
        in_valid = 1;
        xs[0] = x[0]; xs[1] = x[1];
        exp_k.push_back(int'(m.k));
        m.step(xs);
        exp_xi.push_back(m.xi); exp_zeta.push_back(m.zeta);
        exp_thr.push_back(m.thr); exp_out.push_back(m.outlier);
      end else in_valid = 0;
      #1;
      if (out_valid) begin
        int kk;
        if (first_result_cycle < 0) first_result_cycle = c;
        n_results++;
        kk = exp_k.pop_front();
        checks += 5;
        if (k_out !== 32'(kk)) failures++;
        if (!same(xi, exp_xi.pop_front())) failures++;
        if (!same(zeta, exp_zeta.pop_front())) failures++;
        if (!same(threshold, exp_thr.pop_front())) failures++;
        if (outlier !== exp_out.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL %s k=%0d outlier mismatch", name, kk);
        end
        if (kk >= f0 && kk <= f1) begin in_win++; if (outlier) in_win_flag++; end
        if (kk >= 1000 && kk < f0) begin pre++; if (outlier) pre_flag++; end
      end
    end
    $display("%s: %0d samples, %0d results, fault window %0d..%0d flagged %0d of %0d, before it %0d of %0d",
             name, n_samples, n_results, f0, f1, in_win_flag, in_win, pre_flag, pre);
    checks += 4;
    if (n_results != n_samples) begin failures++; $display("FAIL result count"); end
    if (first_result_cycle != 2) begin failures++; $display("FAIL first result in cycle %0d", first_result_cycle); end
    if (2 * in_win_flag < in_win) begin failures++; $display("FAIL fault not detected"); end
    if (100 * pre_flag > pre) begin failures++; $display("FAIL too many false alarms"); end
  endtask

  initial begin
    x[0] = 0; x[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run("item 1 (f18)", 58800, 59800, 20.0, 8.0);
    run("item 2 (f16)", 57275, 57550, -10.0, 5.0);
    run("item 3 (f18)", 58830, 58930, 20.0, 8.0);
    run("item 4 (f18)", 58520, 58625, 20.0, 8.0);
    run("item 5 (f18)", 54600, 54700, 20.0, 8.0);
    run("item 6 (f16)", 56670, 56770, -10.0, 5.0);
    run("item 7 (f17)", 37780, 38400, -12.0, 6.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
