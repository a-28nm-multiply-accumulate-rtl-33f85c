// lane_adder: reduces the partial results of the NB compressor blocks.
//
// When the pixel array is partitioned into NB column blocks, each block
// delivers its own K partial sums, NB*K buses in all. For every component k
// this module adds the NB FP17 partial results through ceil(log2 NB)
// pipelined levels of FP17 adders (four levels for NB = 16), leaving the
// K compressed values of the frame for the serializers. The level count and
// FP17 width follow the paper; building it as K independent adder trees is
// this design's choice.
// Timing: out_valid follows in_valid by ceil(log2 NB) cycles.
module lane_adder
  import mac_pkg::*;
#(
  parameter int unsigned NB = 16,
  parameter int unsigned K  = 192
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  fp17_t [K-1:0][NB-1:0]     in,
  output logic                      out_valid,
  output fp17_t [K-1:0]             out
);
  logic [K-1:0] vld;

  for (genvar k = 0; k < K; k++) begin : g_k
    adder_tree #(.N(NB), .E(A_E), .M(A_M)) u_tree (
      .clk, .rst_n, .in_valid, .in(in[k]), .out_valid(vld[k]), .out(out[k])
    );
  end

  assign out_valid = vld[0];

endmodule
