// fp_add: combinational floating-point adder / subtractor.
//
// Computes y = a + b (sub = 0) or y = a - b (sub = 1) on words of
// 1 + EW + MW bits laid out as IEEE-754 (sign, biased exponent, fraction).
// It serves every '+' and '-' box of the TEDA pipeline (MSUMn, VSUBn, VSUM1,
// VSUM2, ESUM1, OSUM1). The circuit is the textbook one: order the operands
// by magnitude, shift the smaller right with guard, round and sticky bits,
// add or subtract the significands, renormalise with a leading-zero count and
// round to nearest, ties to even.
// Subnormal inputs are read as zero and results below the smallest normal
// number are flushed to a signed zero. NaN results are the canonical quiet
// NaN; inf - inf is NaN. There is no clock: the result settles in the same
// cycle, as the operators in the paper's block diagrams do.
// The paper names the adders but not their insides or number format; the
// format, rounding and flush-to-zero are this design's choices.
module fp_add #(
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic           sub,
  output logic [EW+MW:0] y
);
  localparam int unsigned SW = MW + 4;            // hidden + fraction + G,R,S
  localparam logic [EW-1:0] EMAX = '1;
  localparam logic [EW+MW:0] QNAN = {1'b0, EMAX, 1'b1, {(MW-1){1'b0}}};

  logic          sa, sb, sl, ss;
  logic [EW-1:0] ea, eb, el, es;
  logic [MW-1:0] fa, fb;
  logic          a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [SW-1:0] ml, ms, ms_sh;
  logic [2*SW-1:0] wide;
  logic [SW:0]   sum;
  logic [EW+1:0] ediff;
  logic signed [EW+2:0] e_res;
  logic [SW-1:0] norm;
  logic [MW:0]   mant;
  logic          g, rs, rnd_up;
  logic [MW+1:0] mant_r;
  int unsigned   lz;

  always_comb begin
    sa = a[EW+MW];
    sb = b[EW+MW] ^ sub;
    ea = a[EW+MW-1:MW];
    eb = b[EW+MW-1:MW];
    fa = a[MW-1:0];
    fb = b[MW-1:0];
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_inf  = (ea == EMAX) && (fa == '0);
    b_inf  = (eb == EMAX) && (fb == '0);
    a_nan  = (ea == EMAX) && (fa != '0);
    b_nan  = (eb == EMAX) && (fb != '0);

    // order by magnitude: l is the larger operand
    if ({ea, fa} >= {eb, fb}) begin
      sl = sa; el = ea; ml = {1'b1, fa, 3'b000};
      ss = sb; es = eb; ms = {1'b1, fb, 3'b000};
    end else begin
      sl = sb; el = eb; ml = {1'b1, fb, 3'b000};
      ss = sa; es = ea; ms = {1'b1, fa, 3'b000};
    end
    ediff = {2'b00, el} - {2'b00, es};

    // align the smaller significand, folding shifted-out bits into sticky
    wide = {ms, {SW{1'b0}}} >> ediff;
    ms_sh = wide[2*SW-1:SW];
    ms_sh[0] = ms_sh[0] | (wide[SW-1:0] != '0);
    if (ediff > (EW+2)'(SW)) ms_sh = {{(SW-1){1'b0}}, 1'b1};  // only sticky left

    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_sh};
    else          sum = {1'b0, ml} - {1'b0, ms_sh};

    // normalise: bring the leading one to bit SW-1
    e_res = signed'({3'b000, el});
    norm  = sum[SW-1:0];
    lz    = 0;
    if (sum[SW]) begin
      norm  = sum[SW:1];
      norm[0] = norm[0] | sum[0];
      e_res = e_res + 1;
    end else begin
      for (int i = SW - 1; i >= 0; i--) begin
        if (sum[i]) begin
          lz = SW - 1 - i;
          break;
        end
      end
      norm  = sum[SW-1:0] << lz;
      e_res = e_res - signed'((EW+3)'(lz));
    end

    // round to nearest, ties to even
    mant   = norm[SW-1:3];
    g      = norm[2];
    rs     = norm[1] | norm[0];
    rnd_up = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + {{(MW+1){1'b0}}, rnd_up};
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 1;
    end

    // result selection, special cases first
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) y = QNAN;
    else if (a_inf)                                        y = {sa, EMAX, {MW{1'b0}}};
    else if (b_inf)                                        y = {sb, EMAX, {MW{1'b0}}};
    else if (a_zero && b_zero)                             y = {sa & sb, {(EW+MW){1'b0}}};
    else if (a_zero)                                       y = {sb, eb, fb};
    else if (b_zero)                                       y = a;
    else if (sum == '0)                                    y = '0;
    else if (e_res >= signed'({3'b000, EMAX}))             y = {sl, EMAX, {MW{1'b0}}};
    else if (e_res <= 0)                                   y = {sl, {(EW+MW){1'b0}}};
    else                                                   y = {sl, e_res[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
