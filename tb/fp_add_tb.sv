// fp_add_tb: self-checking test of the floating-point adder/subtractor.
// Random operands over a wide exponent range (including exponents close
// together, to exercise cancellation) and a set of special values are applied;
// every result must match, bit for bit, the double-precision sum rounded to
// binary32. NaN results only need to be NaN.
module fp_add_tb;
  import teda_tb_pkg::*;
  logic [31:0] a, b, y, exp_y;
  logic        sub;
  int checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .sub(sub), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic ts);
    real r;
    a = ta; b = tb_; sub = ts;
    #1;
    r = ts ? from_f32(ta) - from_f32(tb_) : from_f32(ta) + from_f32(tb_);
    if (is_nan(ta) || is_nan(tb_) ||
        (ta[30:0] == 31'h7F80_0000 && tb_[30:0] == 31'h7F80_0000 && (ta[31] ^ tb_[31] ^ ts)))
      exp_y = QNAN;
    else exp_y = to_f32(r);
    if (exp_y[30:0] == 0) exp_y[31] = y[31];   // sign of an exact zero is not checked
    checks++;
    if (is_nan(exp_y) ? !is_nan(y) : (y !== exp_y)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h: got %h expected %h", ta, ts ? "-" : "+", tb_, y, exp_y);
    end
  endtask

  initial begin
    logic [31:0] x;
    check(32'h3F80_0000, 32'h3F80_0000, 0);  // 1+1
    check(32'h3F80_0000, 32'h3F80_0000, 1);  // 1-1
    check(32'h4110_0000, 32'h3F80_0000, 0);  // 9+1
    check(32'h0000_0000, 32'h4049_0FDB, 0);  // 0+pi
    check(32'h4049_0FDB, 32'h0000_0000, 1);  // pi-0
    check(32'h7F80_0000, 32'h3F80_0000, 0);  // inf+1
    check(32'h7F80_0000, 32'h7F80_0000, 1);  // inf-inf
    check(32'h7FC0_0000, 32'h3F80_0000, 0);  // nan+1
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 0);  // overflow
    check(32'h3F80_0000, 32'h3380_0000, 0);  // 1 + 2^-24: tie, to even
    check(32'h3F80_0001, 32'h3380_0000, 0);  // tie, round up to even
    check(32'h3F80_0000, 32'h2000_0000, 1);  // tiny sticky subtraction
    for (int i = 0; i < 20000; i++) begin
      x = rand_f32(100, 154);
      if (i % 2 == 0) check(x, {1'($urandom), x[30:23] + 8'($urandom % 3) - 8'd1, 23'($urandom)}, 1'($urandom));
      else            check(x, rand_f32(90, 164), 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
