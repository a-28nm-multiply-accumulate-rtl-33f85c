// mult_bank: one multiplier bank of the compressor.
//
// A bank serves one principal component k: it multiplies the N pixels of the
// column group being processed this cycle by their N weights for k and
// registers the N FP16 products (the pipelining register between the
// multipliers and the adder tree). The bank width N is the number of columns
// a compressor block handles per cycle: 12 columns shared four ways give
// N = 3. Product p[i] is registered one cycle after pix[i] and w[i].
module mult_bank #(
  parameter int unsigned N     = 3,
  parameter int unsigned PIX_W = 12
) (
  input  logic                   clk,
  input  logic [N-1:0][PIX_W-1:0] pix,
  input  mac_pkg::fp12_t [N-1:0] w,
  output mac_pkg::fp16_t [N-1:0] p
);
  mac_pkg::fp16_t [N-1:0] prod;

  for (genvar i = 0; i < N; i++) begin : g_mul
    fp_mult #(
      .PIX_W(PIX_W), .WE(mac_pkg::W_E), .WM(mac_pkg::W_M), .W_BIAS(mac_pkg::W_BIAS),
      .OE(mac_pkg::P_E), .OM(mac_pkg::P_M), .O_BIAS(mac_pkg::P_BIAS)
    ) u_mul (.pix(pix[i]), .w(w[i]), .p(prod[i]));
  end

  always_ff @(posedge clk) p <= prod;

endmodule
