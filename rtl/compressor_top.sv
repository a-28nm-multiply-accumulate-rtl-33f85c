// compressor_top: multiply-accumulate compressor for a pixel detector.
//
// Every frame of ROWS x COLS unsigned pixels is flattened and multiplied by
// a pre-generated encoding matrix of K columns (for example the first K
// principal components), so each frame leaves the chip as K numbers instead
// of ROWS*COLS pixels. Rows stream in one per dv; the weights sit in on-chip
// SRAM. The default is the paper's main configuration: 192 x 168 pixels of
// 12 bits, K = 192, FP12 weights, FP16 products, FP17 sums, 16 blocks of 12
// columns, each sharing its multipliers and adders four ways, so that with a
// 672 MHz clock a row arrives every 4 cycles (168 MHz) and a frame every
// 672 cycles (1 MHz).
//
// Structure (paper): address FSM -> weight SRAMs -> multiplier banks ->
// accumulators, per column block; an SRAM configuration port loads all
// weight SRAMs from a serial stream; a lane adder sums the NB blocks'
// partial results per component. The serializers that send res off chip
// and the analog pixel matrix that drives row/dv are outside this module.
//
// Interface: row/dv/sof from the pixel array (dv one cycle per row, at most
// every SHARE cycles; sof with the first row of a frame); cfg_sdi/cfg_sen/
// cfg_sync the serial configuration stream (see sram_config); res_valid
// pulses once per frame with the K FP17 results on res, which hold until the
// next frame's; data_err/frame_err flag sequence errors (see addr_fsm).
// Latency: res_valid follows the frame's last dv by SHARE + 3 +
// ceil(log2(COLS/NB/SHARE)) + ceil(log2 NB) cycles (4+3+2+4 = 13 by default).
// Reset: asynchronous, active low; SRAM contents are not reset.
module compressor_top
  import mac_pkg::*;
#(
  parameter int unsigned COLS   = 192,
  parameter int unsigned ROWS   = 168,
  parameter int unsigned PIX_W  = 12,
  parameter int unsigned K      = 192,
  parameter int unsigned NB     = 16,
  parameter int unsigned SHARE  = 4,
  parameter int unsigned SRAM_W = 144,
  localparam int unsigned CB     = COLS / NB,               // columns per block
  localparam int unsigned GC     = CB / SHARE,              // multipliers per bank
  localparam int unsigned KPS    = SRAM_W / (W_W * GC),     // components per SRAM
  localparam int unsigned NS_B   = K / KPS,                 // SRAMs per block
  localparam int unsigned N_SRAM = NS_B * NB,               // SRAMs in all
  localparam int unsigned DEPTH  = ROWS * SHARE,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned SW     = (SHARE > 1) ? $clog2(SHARE) : 1,
  localparam int unsigned SELW   = (N_SRAM > 1) ? $clog2(N_SRAM) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // pixel array
  input  logic                       dv,
  input  logic                       sof,
  input  logic [COLS-1:0][PIX_W-1:0] row,
  // serial weight configuration
  input  logic                       cfg_sdi,
  input  logic                       cfg_sen,
  input  logic                       cfg_sync,
  // to the serializers
  output logic                       res_valid,
  output fp17_t [K-1:0]              res,
  // synchronisation errors
  output logic                       data_err,
  output logic                       frame_err
);
  logic              load, rd_valid, rd_first, rd_last;
  logic [AW-1:0]     rd_addr;
  logic [SW-1:0]     rd_phase;
  logic              wr_en;
  logic [SELW-1:0]   wr_sel;
  logic [AW-1:0]     wr_addr;
  logic [SRAM_W-1:0] wr_data;
  logic [NB-1:0]     blk_valid;
  fp17_t [NB-1:0][K-1:0] blk_res;
  fp17_t [K-1:0][NB-1:0] lane_in;

  addr_fsm #(.ROWS(ROWS), .SHARE(SHARE)) u_fsm (
    .clk, .rst_n, .dv, .sof, .load, .rd_valid, .rd_addr, .rd_phase,
    .rd_first, .rd_last, .data_err, .frame_err
  );

  sram_config #(.N_SRAM(N_SRAM), .DEPTH(DEPTH), .WIDTH(SRAM_W)) u_cfg (
    .clk, .rst_n, .sdi(cfg_sdi), .sen(cfg_sen), .sync(cfg_sync),
    .wr_en, .wr_sel, .wr_addr, .wr_data
  );

  for (genvar b = 0; b < NB; b++) begin : g_blk
    compressor_block #(
      .COLS(CB), .K(K), .SHARE(SHARE), .ROWS(ROWS), .PIX_W(PIX_W),
      .SRAM_W(SRAM_W), .SELW(SELW), .SRAM_BASE(b * NS_B)
    ) u_blk (
      .clk, .rst_n, .load, .row(row[b*CB +: CB]),
      .rd_valid, .rd_addr, .rd_phase, .rd_first, .rd_last,
      .wr_en, .wr_sel, .wr_addr, .wr_data,
      .res_valid(blk_valid[b]), .res(blk_res[b])
    );
    for (genvar k = 0; k < K; k++) begin : g_k
      assign lane_in[k][b] = blk_res[b][k];
    end
  end

  lane_adder #(.NB(NB), .K(K)) u_lanes (
    .clk, .rst_n, .in_valid(blk_valid[0]), .in(lane_in), .out_valid(res_valid), .out(res)
  );

  initial assert (COLS % NB == 0) else $error("COLS must be a multiple of NB");

endmodule
