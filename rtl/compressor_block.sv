// compressor_block: one partition of the compressor (a slice of columns).
//
// The pixel array is split into column slices, each handled by an identical
// block; in the main configuration a block takes 12 columns, computes all
// K = 192 principal components for them, and 16 blocks cover 192 columns.
// Inside a block, logic sharing runs the datapath SHARE = 4 times per row:
// in phase g the share_mux presents columns 3g..3g+2, the weight SRAMs
// deliver the matching weights, K multiplier banks of GC = COLS/SHARE = 3
// multipliers form the products, and K accumulators sum them over the
// frame. At the end of a frame the block outputs K FP17 partial results,
// which the lane adder combines with those of the other blocks.
//
// Weight storage (this design's layout; the paper fixes only the sizes):
// N_SRAM = K*GC*W_W/SRAM_W memories of ROWS*SHARE words (48 x 672 x 144
// bits by default). Word row*SHARE+g of SRAM s holds, in 12-bit lane
// j*GC+i (lane 0 at the least significant bits), the weight of component
// k = s*KPS + j for slice column g*GC + i, with KPS = SRAM_W/(W_W*GC) = 4.
// All SRAMs are read with the same address from the address FSM. Writes
// come from the configuration bus: SRAM s writes when wr_sel equals
// SRAM_BASE + s.
//
// Timing: the rd_* inputs are issued the cycle after load; SRAM data and
// the selected pixel group meet at the multipliers one cycle later; the
// products are registered, pass the LEVELS-deep tree and the accumulation
// register. res_valid pulses 3 + ceil(log2 GC) cycles after the frame's
// last read (rd_last) and res holds until the next frame's results.
module compressor_block
  import mac_pkg::*;
#(
  parameter int unsigned COLS      = 12,
  parameter int unsigned K         = 192,
  parameter int unsigned SHARE     = 4,
  parameter int unsigned ROWS      = 168,
  parameter int unsigned PIX_W     = 12,
  parameter int unsigned SRAM_W    = 144,
  parameter int unsigned SELW      = 10,
  parameter int unsigned SRAM_BASE = 0,
  localparam int unsigned GC       = COLS / SHARE,
  localparam int unsigned WPW      = SRAM_W / W_W,
  localparam int unsigned KPS      = WPW / GC,
  localparam int unsigned N_SRAM   = K / KPS,
  localparam int unsigned DEPTH    = ROWS * SHARE,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned SW       = (SHARE > 1) ? $clog2(SHARE) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // pixel row of this slice and the address FSM's controls
  input  logic                       load,
  input  logic [COLS-1:0][PIX_W-1:0] row,
  input  logic                       rd_valid,
  input  logic [AW-1:0]              rd_addr,
  input  logic [SW-1:0]              rd_phase,
  input  logic                       rd_first,
  input  logic                       rd_last,
  // configuration write bus (broadcast)
  input  logic                       wr_en,
  input  logic [SELW-1:0]            wr_sel,
  input  logic [AW-1:0]              wr_addr,
  input  logic [SRAM_W-1:0]          wr_data,
  // per-frame partial results
  output logic                       res_valid,
  output fp17_t [K-1:0]              res
);
  logic [GC-1:0][PIX_W-1:0]  grp;
  logic [SRAM_W-1:0]         rdata [N_SRAM];
  logic [1:0]                v_d, f_d, l_d;
  logic [K-1:0]              acc_valid;

  share_mux #(.COLS(COLS), .SHARE(SHARE), .PIX_W(PIX_W)) u_mux (
    .clk, .load, .row, .sel(rd_phase), .grp
  );

  for (genvar s = 0; s < N_SRAM; s++) begin : g_sram
    logic we;
    assign we = wr_en && (wr_sel == SELW'(SRAM_BASE + s));
    weight_sram #(.DEPTH(DEPTH), .WIDTH(SRAM_W)) u_sram (
      .clk, .we, .addr(we ? wr_addr : rd_addr), .wdata(wr_data), .rdata(rdata[s])
    );
  end

  // Tags: one cycle for the SRAM read / group register, one for the products.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v_d <= '0; f_d <= '0; l_d <= '0;
    end else begin
      v_d <= {v_d[0], rd_valid};
      f_d <= {f_d[0], rd_first};
      l_d <= {l_d[0], rd_last};
    end

  for (genvar k = 0; k < K; k++) begin : g_k
    fp12_t [GC-1:0] w;
    fp16_t [GC-1:0] p;
    for (genvar i = 0; i < GC; i++) begin : g_w
      assign w[i] = rdata[k / KPS][((k % KPS) * GC + i) * W_W +: W_W];
    end
    mult_bank #(.N(GC), .PIX_W(PIX_W)) u_bank (.clk, .pix(grp), .w, .p);
    accumulator #(.N(GC), .E(P_E), .M(P_M), .AE(A_E)) u_acc (
      .clk, .rst_n, .in_valid(v_d[1]), .in_first(f_d[1]), .in_last(l_d[1]),
      .in(p), .res_valid(acc_valid[k]), .res(res[k])
    );
  end

  assign res_valid = acc_valid[0];

  initial begin
    assert (COLS % SHARE == 0) else $error("COLS must be a multiple of SHARE");
    assert (SRAM_W % (W_W * GC) == 0) else $error("an SRAM word must hold whole groups");
    assert (K % KPS == 0) else $error("K must be a multiple of components per SRAM");
  end

endmodule
