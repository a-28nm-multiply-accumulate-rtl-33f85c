// mac_pkg: number formats and default sizes shared by the compressor RTL.
//
// The compressor multiplies unsigned 12-bit pixels by floating-point weights
// and sums the products in floating point. Three formats appear on the
// datapath, each {sign, exponent, mantissa} with a hidden leading one:
//   FP12 weights     e=5, m=6,  bias 31 (weights lie in (-2, 2))
//   FP16 products    e=5, m=10, bias 15 (IEEE half layout)
//   FP17 sums        e=6, m=10, bias 31 (accumulation and lane reduction)
// An exponent field of zero means the value zero; there are no subnormals,
// infinities or NaNs. The format widths follow the paper; the zero encoding
// and saturation behaviour are this design's choices.
package mac_pkg;

  // Weight format (FP12)
  localparam int unsigned W_E    = 5;
  localparam int unsigned W_M    = 6;
  localparam int unsigned W_BIAS = (1 << W_E) - 1;  // 31: weights need no positive exponent
  localparam int unsigned W_W    = 1 + W_E + W_M;   // 12

  // Product / adder-tree format (FP16)
  localparam int unsigned P_E    = 5;
  localparam int unsigned P_M    = 10;
  localparam int unsigned P_BIAS = (1 << (P_E - 1)) - 1;  // 15
  localparam int unsigned P_W    = 1 + P_E + P_M;         // 16

  // Accumulation format (FP17)
  localparam int unsigned A_E    = 6;
  localparam int unsigned A_M    = 10;
  localparam int unsigned A_BIAS = (1 << (A_E - 1)) - 1;  // 31
  localparam int unsigned A_W    = 1 + A_E + A_M;         // 17

  typedef logic [W_W-1:0] fp12_t;
  typedef logic [P_W-1:0] fp16_t;
  typedef logic [A_W-1:0] fp17_t;

  // Default array and datapath sizes (main configuration: 192x168 pixels,
  // K = 192 components, 16 blocks of 12 columns, 4x logic sharing).
  localparam int unsigned PIX_W_DEF  = 12;
  localparam int unsigned COLS_DEF   = 192;
  localparam int unsigned ROWS_DEF   = 168;
  localparam int unsigned K_DEF      = 192;
  localparam int unsigned NB_DEF     = 16;
  localparam int unsigned SHARE_DEF  = 4;
  localparam int unsigned SRAM_W_DEF = 144;

  // Exact conversion of an FP16 value to FP17 (same mantissa, wider exponent).
  function automatic fp17_t fp16_to_fp17(fp16_t x);
    logic [P_E-1:0] e;
    e = x[P_M +: P_E];
    if (e == '0) return '0;
    return {x[P_W-1], A_E'(e) + A_E'(A_BIAS - P_BIAS), x[P_M-1:0]};
  endfunction

endpackage
