// fp_mult: unsigned integer pixel times floating-point weight.
//
// One of the K x N multipliers of the compressor. Because one operand is an
// integer, the multiplier is an integer product of the pixel and the weight's
// significand (hidden one plus mantissa), followed by a leading-one search,
// a normalising shift and round-to-nearest-even down to the output mantissa.
// The output exponent is the leading-one position plus the weight exponent,
// re-biased to the output format; the output sign is the weight sign, since
// the pixel is unsigned. That structure is the paper's. This design's own
// choices: an exponent field of 0 means zero (weight or product), products
// below the smallest normal output are flushed to zero, and a product above
// the largest exponent saturates (no infinity).
//
// Interface: pix (PIX_W-bit unsigned), w ({sign, WE exp, WM mantissa}),
// p ({sign, OE exp, OM mantissa}). Purely combinational; the pipeline
// register that follows it is in mult_bank.
module fp_mult #(
  parameter int unsigned PIX_W  = 12,
  parameter int unsigned WE     = 5,
  parameter int unsigned WM     = 6,
  parameter int unsigned W_BIAS = 31,
  parameter int unsigned OE     = 5,
  parameter int unsigned OM     = 10,
  parameter int unsigned O_BIAS = 15
) (
  input  logic [PIX_W-1:0]     pix,
  input  logic [WE+WM:0]       w,
  output logic [OE+OM:0]       p
);
  localparam int unsigned PW = PIX_W + WM + 1;   // integer product width
  localparam int unsigned NW = PW + OM + 2;      // product plus rounding room
  localparam int EMAX = (1 << OE) - 1;

  logic          w_sign;
  logic [WE-1:0] w_exp;
  logic [WM:0]   w_sig;
  logic [PW-1:0] prod;
  logic [NW-1:0] norm;
  logic [OM-1:0] mant;
  logic [OM:0]   mant_r;
  logic          guard, sticky, round_up;
  int            lead;
  int            exp_i;

  assign w_sign = w[WE+WM];
  assign w_exp  = w[WM +: WE];
  assign w_sig  = {1'b1, w[WM-1:0]};
  assign prod   = PW'(pix) * PW'(w_sig);

  always_comb begin
    // Leading-one position of the integer product.
    lead = 0;
    for (int i = 0; i < PW; i++)
      if (prod[i]) lead = i;
    // Normalise: move the leading one to the top bit of norm.
    norm     = {prod, (OM + 2)'(0)} << (PW - 1 - lead);
    mant     = norm[NW-2 -: OM];
    guard    = norm[NW-2-OM];
    sticky   = |norm[NW-3-OM:0];
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + (OM+1)'(round_up);
    exp_i    = lead + int'(w_exp) - int'(W_BIAS) - int'(WM) + int'(O_BIAS) + int'(mant_r[OM]);
    if (pix == '0 || w_exp == '0 || exp_i <= 0)
      p = '0;
    else if (exp_i > EMAX)
      p = {w_sign, {OE{1'b1}}, {OM{1'b1}}};
    else
      p = {w_sign, OE'(exp_i), mant_r[OM-1:0]};
  end

endmodule
