// weight_sram: weight memory of the compressor, standing in for one
// 672-word x 144-bit SRAM macro of the 28 nm process.
//
// Each word holds 12 FP12 weights. The memory is single-port: a cycle either
// writes wdata to addr (we = 1, configuration) or reads addr, with rdata
// valid on the following cycle (a registered read, as a synchronous SRAM
// macro provides). Depth, width and the use of many such macros follow the
// paper; the single port and one-cycle latency are this design's choices.
// The contents are not reset; they are loaded before operation.
module weight_sram #(
  parameter int unsigned DEPTH = 672,
  parameter int unsigned WIDTH = 144,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[addr] <= wdata;
    else    rdata     <= mem[addr];

endmodule
