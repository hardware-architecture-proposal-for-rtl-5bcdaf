// teda_counter: iteration counter k of the TEDA pipeline.
//
// k is the index of the sample currently presented at the system input,
// starting at 1 for the first sample after reset. It advances by one at the
// clock edge that accepts a sample (in_valid = 1) and saturates at its largest
// value instead of wrapping, so 1/k never becomes 1/0. The same k is
// fed to every module, as in the architecture overview, where the later
// stages delay it in their own registers.
// Following the paper, k is updated by incrementing a counter; the reset
// value, the valid qualifier and the saturation are this design's choices.
// Reset is asynchronous and active low.
module teda_counter #(
  parameter int unsigned KW = teda_pkg::K_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic [KW-1:0] k
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      k <= KW'(1);
    else if (in_valid && (k != '1))  k <= k + 1'b1;
  end
endmodule
