// share_mux: column-group multiplexer for logic sharing.
//
// With SHARE-fold logic sharing the multipliers and adders run SHARE times
// faster than rows arrive and process one group of COLS/SHARE columns per
// cycle. This module captures a row of COLS pixels when load is high (the
// pixel pins of the slice), then for each cycle selects group sel and
// registers it, so that the group reaches the multipliers in the same cycle
// as the weights read from SRAM at the address issued together with sel.
// Group g is the contiguous columns g*GC .. g*GC+GC-1 (GC = COLS/SHARE); the
// grouping is this design's choice, the mux itself is the paper's.
// Timing: grp is valid one cycle after sel; the row register may be reloaded
// in the same cycle as the last group is selected.
module share_mux #(
  parameter int unsigned COLS  = 12,
  parameter int unsigned SHARE = 4,
  parameter int unsigned PIX_W = 12,
  localparam int unsigned GC   = COLS / SHARE,
  localparam int unsigned SW   = (SHARE > 1) ? $clog2(SHARE) : 1
) (
  input  logic                       clk,
  input  logic                       load,
  input  logic [COLS-1:0][PIX_W-1:0] row,
  input  logic [SW-1:0]              sel,
  output logic [GC-1:0][PIX_W-1:0]   grp
);
  logic [COLS-1:0][PIX_W-1:0] row_q;

  always_ff @(posedge clk)
    if (load) row_q <= row;

  always_ff @(posedge clk)
    for (int i = 0; i < int'(GC); i++)
      grp[i] <= row_q[int'(sel) * int'(GC) + i];

  initial assert (COLS % SHARE == 0) else $error("COLS must be a multiple of SHARE");

endmodule
