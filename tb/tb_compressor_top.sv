// tb_compressor_top: end-to-end test of a reduced compressor: 8 columns in
// NB = 2 blocks of 4, 2-way logic sharing, 3-row frames, K = 4 components,
// 48-bit SRAM words (two components per SRAM, four SRAMs in all).
//
// The weights are loaded through the serial configuration port as packets
// {select, address, data}. Frames are then streamed with dv every SHARE
// cycles (back to back) or with gaps, and each frame's K results are
// compared with a real-number reference that rounds where the hardware
// does: FP16 products, FP16 tree (p0+p1) per block and phase, FP17
// accumulation per block, FP17 lane sum (block0 + block1). Results must
// appear SHARE + 3 + 1 + 1 = 7 cycles after the frame's last dv.
// Mechanisms that must each occur at least once: every sharing phase,
// back-to-back frames, a data error (dv during a row, dropped), both kinds
// of frame error (early sof restarts the frame; a row without sof where a
// frame must start is dropped), a sum beyond the FP16 range (FP17 widening),
// a partial serial reconfiguration between frames, and the lane reduction.
module tb_compressor_top;
  import fp_ref_pkg::*;
  localparam int COLS = 8, ROWS = 3, K = 4, NB = 2, SHARE = 2, SRAM_W = 48;
  localparam int CB = COLS / NB, GC = CB / SHARE, KPS = SRAM_W / (12 * GC), NS_B = K / KPS;
  localparam int SELW = 2, AW = 3, PKT = SELW + AW + SRAM_W;
  localparam int LAT = SHARE + 3 + 1 + 1;

  logic clk = 0, rst_n = 0;
  logic dv, sof, cfg_sdi, cfg_sen, cfg_sync, res_valid, data_err, frame_err;
  logic [COLS-1:0][11:0] row;
  logic [K-1:0][16:0]    res;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_frames = 0, n_b2b = 0, n_derr = 0, n_ferr = 0, n_big = 0, n_reconf = 0;
  int n_phase [SHARE];

  compressor_top #(.COLS(COLS), .ROWS(ROWS), .K(K), .NB(NB), .SHARE(SHARE), .SRAM_W(SRAM_W)) dut (
    .clk, .rst_n, .dv, .sof, .row, .cfg_sdi, .cfg_sen, .cfg_sync,
    .res_valid, .res, .data_err, .frame_err);

  always #5 clk = ~clk;

  logic [11:0] W   [ROWS][COLS][K];
  logic [11:0] pix [ROWS][COLS];
  logic [K-1:0][16:0] q[$];
  int                 t[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.rd_valid) n_phase[dut.rd_phase]++;
      n_derr += data_err;
      n_ferr += frame_err;
      if (res_valid) begin
        checks++;
        n_frames++;
        for (int k = 0; k < K; k++) if (fp17_r(32'(res[k])) > 65504.0 || fp17_r(32'(res[k])) < -65504.0) n_big++;
        if (q.size() == 0 || q[0] !== res || t[0] != cyc) begin
          failures++;
          if (failures < 10) $display("frame result mismatch at %0d: got %h exp %h (due %0d)", cyc, res,
                                      q.size() ? q[0] : '0, t.size() ? t[0] : -1);
        end
        if (q.size() != 0) begin void'(q.pop_front()); void'(t.pop_front()); end
      end
    end
  end

  // ---- serial configuration ----
  task automatic send_packet(input int sel, input int addr, input logic [SRAM_W-1:0] d);
    logic [PKT-1:0] p;
    p = {SELW'(sel), AW'(addr), d};
    for (int i = PKT - 1; i >= 0; i--) begin
      @(negedge clk);
      cfg_sen = 1; cfg_sdi = p[i];
    end
    @(negedge clk); cfg_sen = 0;
  endtask

  task automatic write_sram(input int b, input int s, input int r, input int g);
    logic [SRAM_W-1:0] d;
    for (int j = 0; j < KPS; j++)
      for (int i = 0; i < GC; i++)
        d[(j * GC + i) * 12 +: 12] = W[r][b * CB + g * GC + i][s * KPS + j];
    send_packet(b * NS_B + s, r * SHARE + g, d);
  endtask

  task automatic configure_all(input bit big);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < K; k++)
          W[r][c][k] = big ? {1'b0, 5'd31, 6'($urandom_range(63, 48))} : rand_w(12);
    for (int b = 0; b < NB; b++)
      for (int s = 0; s < NS_B; s++)
        for (int r = 0; r < ROWS; r++)
          for (int g = 0; g < SHARE; g++) write_sram(b, s, r, g);
    @(negedge clk); cfg_sync = 1; @(negedge clk); cfg_sync = 0;
  endtask

  // ---- reference ----
  function automatic logic [K-1:0][16:0] reference();
    logic [K-1:0][16:0] out;
    for (int k = 0; k < K; k++) begin
      logic [16:0] blk [NB];
      for (int b = 0; b < NB; b++)
        for (int r = 0; r < ROWS; r++)
          for (int g = 0; g < SHARE; g++) begin
            logic [15:0] ps;
            logic [16:0] x;
            int c0;
            c0 = b * CB + g * GC;
            ps = ref_add16(ref_mult(pix[r][c0], W[r][c0][k]), ref_mult(pix[r][c0 + 1], W[r][c0 + 1][k]));
            x  = r_fp17(fp16_r(32'(ps)));
            blk[b] = (r == 0 && g == 0) ? x : ref_add17(blk[b], x);
          end
      out[k] = ref_add17(blk[0], blk[1]);
    end
    return out;
  endfunction

  // ---- pixel rows ----
  task automatic send_row(input int r, input bit s);
    @(negedge clk);
    dv = 1; sof = s;
    for (int c = 0; c < COLS; c++) row[c] = pix[r][c];
    @(negedge clk);
    dv = 0; sof = 0; row = '1;
  endtask

  // A frame; gap = idle cycles after each dv beyond the minimum SHARE-1.
  task automatic frame(input int gap, input bit big);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) pix[r][c] = big ? 12'($urandom_range(4095, 4000)) : 12'($urandom);
    for (int r = 0; r < ROWS; r++) begin
      send_row(r, r == 0);
      if (r == ROWS - 1) begin q.push_back(reference()); t.push_back(cyc - 1 + LAT); end
      repeat (SHARE - 2 + gap) @(negedge clk);
    end
  endtask

  initial begin
    dv = 0; sof = 0; row = '0; cfg_sdi = 0; cfg_sen = 0; cfg_sync = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    configure_all(0);
    // back-to-back frames
    frame(0, 0); frame(0, 0); frame(0, 0);
    n_b2b++;
    frame(2, 0);
    // data error: an extra dv one cycle after a row is dropped
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) pix[r][c] = 12'($urandom);
    @(negedge clk);
    dv = 1; sof = 1;
    for (int c = 0; c < COLS; c++) row[c] = pix[0][c];
    @(negedge clk);
    dv = 1; sof = 0; row = '1;                       // arrives while row 0 is busy: dropped
    @(negedge clk);
    dv = 0;
    send_row(1, 0); repeat (SHARE - 2) @(negedge clk);
    send_row(2, 0); q.push_back(reference()); t.push_back(cyc - 1 + LAT);
    repeat (3) @(negedge clk);
    // frame error: sof after one row restarts the frame
    send_row(0, 1); repeat (2) @(negedge clk);
    frame(1, 0);
    // frame error: a row without sof where a frame must start is dropped
    send_row(0, 0); repeat (2) @(negedge clk);
    frame(0, 0);
    repeat (4) @(negedge clk);
    // partial serial reconfiguration: rewrite one word of one block
    for (int c = 4; c < 6; c++) for (int k = 0; k < 2; k++) W[1][c][k] = rand_w(12);
    write_sram(1, 0, 1, 0);
    n_reconf++;
    frame(0, 0);
    // large weights and pixels: the frame sums exceed the FP16 range
    repeat (10) @(negedge clk);
    configure_all(1);
    frame(0, 1);
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_frames != 9 || n_b2b == 0 || n_derr != 1 || n_ferr != 2 || n_big == 0 || n_reconf == 0 ||
        n_phase[0] == 0 || n_phase[1] == 0) begin
      failures++;
      $display("mechanism counts: frames %0d derr %0d ferr %0d big %0d", n_frames, n_derr, n_ferr, n_big);
    end
    $display("mechanisms: frames=%0d back_to_back=%0d data_err=%0d frame_err=%0d fp17_range=%0d reconfig=%0d phase0=%0d phase1=%0d",
             n_frames, n_b2b, n_derr, n_ferr, n_big, n_reconf, n_phase[0], n_phase[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
