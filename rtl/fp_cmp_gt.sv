// fp_cmp_gt: combinational floating-point 'greater than' comparator.
//
// gt = (a > b) for words of 1 + EW + MW bits (IEEE-754 layout). This is the
// OCOMP1 box that decides whether the normalised eccentricity exceeds the
// threshold. Operands with a zero exponent field are read as zero (so +0 and
// -0 compare equal), and any NaN operand makes gt = 0 - which classifies
// the undefined eccentricity of a stream with zero variance as normal.
// The comparison is done on sign and magnitude fields, with no arithmetic.
// Purely combinational. The NaN rule is this design's choice.
module fp_cmp_gt #(
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic           gt
);
  localparam logic [EW-1:0] EMAX = '1;

  logic          sa, sb, a_zero, b_zero, a_nan, b_nan;
  logic [EW+MW-1:0] ma, mb;   // magnitudes, subnormals cleared

  always_comb begin
    sa = a[EW+MW];
    sb = b[EW+MW];
    a_zero = (a[EW+MW-1:MW] == '0);
    b_zero = (b[EW+MW-1:MW] == '0);
    a_nan  = (a[EW+MW-1:MW] == EMAX) && (a[MW-1:0] != '0);
    b_nan  = (b[EW+MW-1:MW] == EMAX) && (b[MW-1:0] != '0);
    ma = a_zero ? '0 : a[EW+MW-1:0];
    mb = b_zero ? '0 : b[EW+MW-1:0];

    if (a_nan || b_nan)                gt = 1'b0;
    else if (a_zero && b_zero)         gt = 1'b0;
    else if (a_zero)                   gt = sb;           // 0 > b iff b < 0
    else if (b_zero)                   gt = !sa;          // a > 0 iff a positive
    else if (sa != sb)                 gt = !sa;          // positive beats negative
    else if (!sa)                      gt = (ma > mb);
    else                               gt = (ma < mb);
  end
endmodule
