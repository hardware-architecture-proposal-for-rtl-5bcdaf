// fp_cmp_gt_tb: self-checking test of the floating-point comparator.
// Compares gt against the simulator's real comparison for random pairs
// (often with equal exponents or equal values), signed zeros and NaNs.
module fp_cmp_gt_tb;
  import teda_tb_pkg::*;
  logic [31:0] a, b;
  logic gt;
  int checks = 0, failures = 0;

  fp_cmp_gt dut (.a(a), .b(b), .gt(gt));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_);
    bit e;
    a = ta; b = tb_;
    #1;
    e = (is_nan(ta) || is_nan(tb_)) ? 1'b0 : (from_f32(ta) > from_f32(tb_));
    checks++;
    if (gt !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %h > %h: got %b expected %b", ta, tb_, gt, e);
    end
  endtask

  initial begin
    logic [31:0] x;
    check(32'h3F40_0000, 32'h4020_0000);   // 0.75 > 2.5
    check(32'h4020_0000, 32'h3F40_0000);
    check(32'h0000_0000, 32'h8000_0000);   // +0 > -0
    check(32'h8000_0000, 32'h0000_0000);
    check(32'h7FC0_0000, 32'h3F80_0000);   // NaN
    check(32'h3F80_0000, 32'h7FC0_0000);
    check(32'hBF80_0000, 32'hC000_0000);   // -1 > -2
    check(32'h7F80_0000, 32'h7F7F_FFFF);   // inf > max
    for (int i = 0; i < 20000; i++) begin
      x = rand_f32(1, 254);
      case (i % 4)
        0: check(x, x);
        1: check(x, {x[31:23], 23'($urandom)});
        2: check(x, {~x[31], x[30:0]});
        default: check(x, rand_f32(1, 254));
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
