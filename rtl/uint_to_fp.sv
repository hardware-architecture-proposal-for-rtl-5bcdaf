// uint_to_fp: combinational unsigned-integer to floating-point conversion.
//
// Converts the KW-bit iteration counter k to a word of 1 + EW + MW bits so
// that the floating-point datapath can form 1/k, (k-1)/k, k*[sigma^2] and 2k.
// The leading one is found, the value is shifted so that it becomes the
// hidden bit, and the bits below the fraction are rounded to nearest, ties to
// even (for binary32, k is exact up to 2^24). Zero converts to +0.
// The paper feeds k to floating-point operators without saying how; this
// conversion is this design's.
module uint_to_fp #(
  parameter int unsigned KW = teda_pkg::K_W,
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic [KW-1:0]  u,
  output logic [EW+MW:0] y
);
  localparam int unsigned BIAS = (1 << (EW - 1)) - 1;
  localparam int unsigned XW = KW + MW + 2;   // value with room for guard/sticky

  int unsigned   msb;
  logic [XW-1:0] sh;
  logic [MW:0]   mant;
  logic          g, st, rnd_up;
  logic [MW+1:0] mant_r;
  logic [EW:0]   e_res;

  always_comb begin
    msb = 0;
    for (int i = 0; i < int'(KW); i++) if (u[i]) msb = i;
    // put the leading one at bit XW-1
    sh   = {u, {(MW+2){1'b0}}} << (KW - 1 - msb);
    mant = sh[XW-1 -: MW+1];
    g    = sh[XW-MW-2];
    st   = (sh[XW-MW-3:0] != '0);
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {{(MW+1){1'b0}}, rnd_up};
    e_res  = (EW+1)'(BIAS + msb);
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 1'b1;
    end
    if (u == '0) y = '0;
    else         y = {1'b0, e_res[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
