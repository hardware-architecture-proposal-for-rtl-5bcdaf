// fp_mul: combinational floating-point multiplier.
//
// y = a * b on words of 1 + EW + MW bits (IEEE-754 layout). It serves every
// 'x' box of the TEDA pipeline (MMULT1n, MMULT2n, VMULT1_n, VMULT2, VMULT3,
// EMULT1, OMULT1). The significands (hidden one included) are multiplied as
// integers, the product is normalised by at most one place, then rounded to
// nearest, ties to even. Exponent overflow gives a signed infinity,
// underflow a signed zero (subnormals are flushed, on input and output).
// inf * 0 and any NaN operand give the canonical quiet NaN.
// Purely combinational, no clock. The paper names the multipliers only; the
// number format and rounding are this design's choices.
module fp_mul #(
  parameter int unsigned EW = teda_pkg::FP_EW,
  parameter int unsigned MW = teda_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam logic [EW-1:0] EMAX = '1;
  localparam int signed BIAS = (1 << (EW - 1)) - 1;
  localparam logic [EW+MW:0] QNAN = {1'b0, EMAX, 1'b1, {(MW-1){1'b0}}};

  logic          s;
  logic [EW-1:0] ea, eb;
  logic [MW-1:0] fa, fb;
  logic          a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [2*MW+1:0] prod;
  logic [MW:0]   mant;
  logic          g, st, rnd_up;
  logic [MW+1:0] mant_r;
  logic signed [EW+2:0] e_res;

  always_comb begin
    s  = a[EW+MW] ^ b[EW+MW];
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

    prod  = {{(MW+1){1'b0}}, 1'b1, fa} * {{(MW+1){1'b0}}, 1'b1, fb};
    e_res = signed'({3'b000, ea}) + signed'({3'b000, eb}) - (EW+3)'(BIAS);
    if (prod[2*MW+1]) begin
      mant  = prod[2*MW+1:MW+1];
      g     = prod[MW];
      st    = (prod[MW-1:0] != '0);
      e_res = e_res + 1;
    end else begin
      mant  = prod[2*MW:MW];
      g     = prod[MW-1];
      st    = (prod[MW-2:0] != '0);
    end
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {{(MW+1){1'b0}}, rnd_up};
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = QNAN;
    else if (a_inf || b_inf)                        y = {s, EMAX, {MW{1'b0}}};
    else if (a_zero || b_zero)                      y = {s, {(EW+MW){1'b0}}};
    else if (e_res >= signed'({3'b000, EMAX}))      y = {s, EMAX, {MW{1'b0}}};
    else if (e_res <= 0)                            y = {s, {(EW+MW){1'b0}}};
    else                                            y = {s, e_res[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
