// fp_mul_tb: self-checking test of the floating-point multiplier.
// Random operands (including products that overflow and underflow) and
// special values; results must equal the double product rounded to binary32.
module fp_mul_tb;
  import teda_tb_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_);
    a = ta; b = tb_;
    #1;
    if (is_nan(ta) || is_nan(tb_) ||
        (ta[30:0] == 31'h7F80_0000 && tb_[30:23] == 0) ||
        (tb_[30:0] == 31'h7F80_0000 && ta[30:23] == 0))
      exp_y = QNAN;
    else exp_y = to_f32(from_f32(ta) * from_f32(tb_));
    checks++;
    if (is_nan(exp_y) ? !is_nan(y) : (y !== exp_y)) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h: got %h expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    check(32'h3F80_0000, 32'h4049_0FDB);   // 1*pi
    check(32'h4000_0000, 32'hC040_0000);   // 2*-3
    check(32'h0000_0000, 32'h4049_0FDB);   // 0*pi
    check(32'h7F80_0000, 32'h0000_0000);   // inf*0
    check(32'h7F80_0000, 32'hBF80_0000);   // inf*-1
    check(32'h7F00_0000, 32'h7F00_0000);   // overflow
    check(32'h0100_0000, 32'h0100_0000);   // underflow
    check(32'h3FFF_FFFF, 32'h3FFF_FFFF);   // rounding carry
    for (int i = 0; i < 20000; i++)
      check(rand_f32(1, 254), rand_f32(1, 254));
    for (int i = 0; i < 20000; i++)
      check(rand_f32(100, 154), rand_f32(100, 154));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
