// fp_add: floating-point adder used throughout the accumulation path.
//
// Works on {sign, E-bit exponent, M-bit mantissa} values with a hidden one.
// Following the paper, a comparator and multiplexers pick the operand of
// larger magnitude; the smaller one's significand is shifted right by the
// exponent difference; the significands are added when the signs agree and
// subtracted otherwise; the leading one of the result sets the new exponent
// and the normalising shift; the result is rounded to nearest even and takes
// the sign of the larger operand. The rounding uses guard, round and sticky
// bits (this design's choice of how to get exact round-to-even).
// Also this design's choices: exponent field 0 is the value zero (no
// subnormals), results below the smallest normal flush to zero, exact
// cancellation gives +0, and results above the largest exponent saturate to
// the largest magnitude since there is no infinity.
//
// E=5, M=10 is the FP16 adder of the adder trees; E=6, M=10 is the FP17
// adder of the accumulation register and the lane reduction.
// Interface: a, b -> s. Purely combinational; callers register the result.
module fp_add #(
  parameter int unsigned E = 5,
  parameter int unsigned M = 10
) (
  input  logic [E+M:0] a,
  input  logic [E+M:0] b,
  output logic [E+M:0] s
);
  localparam int unsigned XW   = M + 4;          // significand + guard, round, sticky
  localparam int          EMAX = (1 << E) - 1;

  logic            a_big;
  logic [E+M:0]    xl, xs;                       // larger / smaller magnitude
  logic [E-1:0]    el, es;
  logic [M:0]      sig_l, sig_s;
  logic [XW-1:0]   al, as_;
  logic [2*XW-1:0] shifted;
  logic [XW:0]     sum;
  logic [XW-1:0]   norm;
  logic [M-1:0]    mant;
  logic [M:0]      mant_r;
  logic            round_up;
  int              d, lead, exp_i;

  always_comb begin
    a_big = a[E+M-1:0] >= b[E+M-1:0];
    xl    = a_big ? a : b;
    xs    = a_big ? b : a;
    el    = xl[M +: E];
    es    = xs[M +: E];
    sig_l = (el == '0) ? '0 : {1'b1, xl[M-1:0]};
    sig_s = (es == '0) ? '0 : {1'b1, xs[M-1:0]};

    // Align the smaller significand; shifted-out bits collapse into sticky.
    d = int'(el) - int'(es);
    if (d > XW) d = XW;
    al      = {sig_l, 3'b000};
    shifted = {sig_s, 3'b000, {XW{1'b0}}} >> d;
    as_     = shifted[2*XW-1 -: XW] | XW'(|shifted[XW-1:0]);

    sum = (xl[E+M] == xs[E+M]) ? ({1'b0, al} + {1'b0, as_})
                               : ({1'b0, al} - {1'b0, as_});

    // Leading one of the sum.
    lead = 0;
    for (int i = 0; i <= XW; i++)
      if (sum[i]) lead = i;

    if (lead == XW) begin
      norm  = sum[XW:1] | XW'(sum[0]);
      exp_i = int'(el) + 1;
    end else begin
      norm  = sum[XW-1:0] << (XW - 1 - lead);
      exp_i = int'(el) - (XW - 1 - lead);
    end

    mant     = norm[XW-2 -: M];
    round_up = norm[2] & (norm[1] | norm[0] | mant[0]);
    mant_r   = {1'b0, mant} + (M+1)'(round_up);
    exp_i    = exp_i + int'(mant_r[M]);

    if (sum == '0 || exp_i <= 0)
      s = '0;
    else if (exp_i > EMAX)
      s = {xl[E+M], {E{1'b1}}, {M{1'b1}}};
    else
      s = {xl[E+M], E'(exp_i), mant_r[M-1:0]};
  end

endmodule
