// fp_div: combinational floating-point divider.
//
// y = a / b on words of 1 + EW + MW bits (IEEE-754 layout). It serves every
// division box of the TEDA pipeline (MDIVn and VDIV1 for 1/k, the '(k-1)/k'
// boxes, EDIV1, ODIV1 for xi/2, ODIV2 for the threshold). The dividend
// significand, shifted left by MW+2, is divided by the divisor significand in
// one integer division; the quotient then lies in [2^(MW+1), 2^(MW+3)), gives
// MW+1 result bits and a guard bit, and a non-zero remainder is the sticky
// bit. Rounding is to nearest, ties to even; subnormals are flushed to zero.
// 0/0, inf/inf and NaN operands give the canonical quiet NaN, x/0 a signed
// infinity, 0/x and x/inf a signed zero. Purely combinational, no clock.
// The paper names the dividers only; their insides are this design's.
module fp_div #(
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
  localparam int unsigned QW = 2*MW + 3;   // width of the shifted dividend

  logic          s;
  logic [EW-1:0] ea, eb;
  logic [MW-1:0] fa, fb;
  logic          a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [QW-1:0] num, den, q, r;
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

    num = {1'b1, fa, {(MW+2){1'b0}}};
    den = {{(MW+2){1'b0}}, 1'b1, fb};
    q   = num / den;
    r   = num % den;
    e_res = signed'({3'b000, ea}) - signed'({3'b000, eb}) + (EW+3)'(BIAS);
    if (q[MW+2]) begin
      mant = q[MW+2:2];
      g    = q[1];
      st   = q[0] | (r != '0);
    end else begin
      mant  = q[MW+1:1];
      g     = q[0];
      st    = (r != '0);
      e_res = e_res - 1;
    end
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {{(MW+1){1'b0}}, rnd_up};
    if (mant_r[MW+1]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 1;
    end

    if (a_nan || b_nan || (a_zero && b_zero) || (a_inf && b_inf)) y = QNAN;
    else if (a_inf || b_zero)                       y = {s, EMAX, {MW{1'b0}}};
    else if (a_zero || b_inf)                       y = {s, {(EW+MW){1'b0}}};
    else if (e_res >= signed'({3'b000, EMAX}))      y = {s, EMAX, {MW{1'b0}}};
    else if (e_res <= 0)                            y = {s, {(EW+MW){1'b0}}};
    else                                            y = {s, e_res[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
