// fp_div_tb: self-checking test of the floating-point divider.
// Random operands and special values (1/k, x/2, 0/0, x/0, inf/inf);
// results must equal the double quotient rounded to binary32.
module fp_div_tb;
  import teda_tb_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp_div dut (.a(a), .b(b), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_);
    bit az, bz, ai, bi;
    a = ta; b = tb_;
    #1;
    az = (ta[30:23] == 0); bz = (tb_[30:23] == 0);
    ai = (ta[30:0] == 31'h7F80_0000); bi = (tb_[30:0] == 31'h7F80_0000);
    if (is_nan(ta) || is_nan(tb_) || (az && bz) || (ai && bi)) exp_y = QNAN;
    else if (bz)      exp_y = {ta[31] ^ tb_[31], 31'h7F80_0000};
    else if (az)      exp_y = {ta[31] ^ tb_[31], 31'h0};
    else              exp_y = to_f32(from_f32(ta) / from_f32(tb_));
    checks++;
    if (is_nan(exp_y) ? !is_nan(y) : (y !== exp_y)) begin
      failures++;
      if (failures < 10) $display("FAIL %h / %h: got %h expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    check(32'h3F80_0000, 32'h4040_0000);   // 1/3
    check(32'h4110_0000, 32'h4000_0000);   // 9/2
    check(32'h0000_0000, 32'h0000_0000);   // 0/0
    check(32'h3F80_0000, 32'h0000_0000);   // 1/0
    check(32'h0000_0000, 32'h4000_0000);   // 0/2
    check(32'h7F80_0000, 32'h7F80_0000);   // inf/inf
    check(32'h4049_0FDB, 32'h7F80_0000);   // pi/inf
    for (int i = 1; i <= 3000; i++)         // 1/k, as in VDIV1
      check(32'h3F80_0000, to_f32(real'(i)));
    for (int i = 0; i < 20000; i++)
      check(rand_f32(1, 254), rand_f32(1, 254));
    for (int i = 0; i < 20000; i++)
      check(rand_f32(100, 154), rand_f32(100, 154));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
