// teda_counter_tb: checks the iteration counter k.
// k must be 1 after reset, advance by one per accepted sample only, and
// saturate at its maximum. A 4-bit counter is used so saturation is reached.
module teda_counter_tb;
  localparam int unsigned KW = 4;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [KW-1:0] k;
  int checks = 0, failures = 0;
  int exp_k;

  teda_counter #(.KW(KW)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(k));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_k = 1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      checks++;
      if (k !== KW'(exp_k)) begin
        failures++;
        $display("FAIL cycle %0d: k=%0d expected %0d", c, k, exp_k);
      end
      if (c == 100) begin
        rst_n = 0; #1; rst_n = 1;
        exp_k = 1;
        checks++;
        if (k !== KW'(1)) begin failures++; $display("FAIL: reset value %0d", k); end
      end
      in_valid = ($urandom % 3) != 0;
      if (in_valid && exp_k < (1 << KW) - 1) exp_k++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
