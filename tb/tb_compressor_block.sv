// tb_compressor_block: a reduced compressor block (4 columns, K = 4,
// 2-way sharing, 3-row frames, 48-bit SRAM words holding two components per
// SRAM) is loaded through its configuration bus, including writes addressed
// to other blocks' SRAMs that it must ignore. The testbench then plays the
// address FSM's role: it loads rows every SHARE cycles and issues the reads
// with phase and first/last tags, for four frames back to back and one with
// gaps. The K results of each frame are compared with a real-number
// reference that multiplies, adds and accumulates in the hardware's order,
// and must appear 3 + ceil(log2 GC) = 4 cycles after the frame's last read.
// The weights are rewritten between frames to check reconfiguration.
module tb_compressor_block;
  import fp_ref_pkg::*;
  localparam int COLS = 4, K = 4, SHARE = 2, ROWS = 3, SRAM_W = 48;
  localparam int GC = COLS / SHARE, KPS = SRAM_W / (12 * GC), NS = K / KPS;
  localparam int BASE = 2;

  logic clk = 0, rst_n = 0;
  logic load, rd_valid, rd_first, rd_last, wr_en, res_valid;
  logic [COLS-1:0][11:0] row;
  logic [2:0]  rd_addr, wr_addr;
  logic [0:0]  rd_phase;
  logic [2:0]  wr_sel;
  logic [SRAM_W-1:0] wr_data;
  logic [K-1:0][16:0] res;
  int checks = 0, failures = 0, n_frames = 0, n_reconf = 0;
  int cyc = 0;

  compressor_block #(.COLS(COLS), .K(K), .SHARE(SHARE), .ROWS(ROWS), .SRAM_W(SRAM_W),
                     .SELW(3), .SRAM_BASE(BASE)) dut (
    .clk, .rst_n, .load, .row, .rd_valid, .rd_addr, .rd_phase, .rd_first, .rd_last,
    .wr_en, .wr_sel, .wr_addr, .wr_data, .res_valid, .res);

  always #5 clk = ~clk;

  logic [11:0] W   [ROWS][COLS][K];
  logic [11:0] pix [ROWS][COLS];
  logic [K-1:0][16:0] q[$];
  int                 t[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && res_valid) begin
      checks++;
      n_frames++;
      if (q.size() == 0 || q[0] !== res || t[0] != cyc) begin
        failures++;
        if (failures < 10) $display("frame result mismatch at %0d: got %h exp %h", cyc, res,
                                    q.size() ? q[0] : '0);
      end
      if (q.size() != 0) begin void'(q.pop_front()); void'(t.pop_front()); end
    end
  end

  task automatic write_word(input int sel, input int addr, input logic [SRAM_W-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_sel = 3'(sel); wr_addr = 3'(addr); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic load_weights();
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < K; k++) W[r][c][k] = rand_w(12);
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < ROWS; r++)
        for (int g = 0; g < SHARE; g++) begin
          logic [SRAM_W-1:0] d;
          for (int j = 0; j < KPS; j++)
            for (int i = 0; i < GC; i++)
              d[(j * GC + i) * 12 +: 12] = W[r][g * GC + i][s * KPS + j];
          write_word(BASE + s, r * SHARE + g, d);
          write_word(0, r * SHARE + g, '1);          // another block's SRAM
        end
    n_reconf++;
  endtask

  function automatic logic [K-1:0][16:0] reference();
    logic [K-1:0][16:0] r;
    for (int k = 0; k < K; k++) begin
      logic [16:0] acc;
      for (int rr = 0; rr < ROWS; rr++)
        for (int g = 0; g < SHARE; g++) begin
          logic [15:0] ps;
          logic [16:0] x;
          ps = ref_add16(ref_mult(pix[rr][g*GC], W[rr][g*GC][k]), ref_mult(pix[rr][g*GC+1], W[rr][g*GC+1][k]));
          x  = r_fp17(fp16_r(32'(ps)));
          acc = (rr == 0 && g == 0) ? x : ref_add17(acc, x);
        end
      r[k] = acc;
    end
    return r;
  endfunction

  task automatic frame(input bit gaps);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) pix[r][c] = 12'($urandom);
    @(negedge clk);
    load = 1;
    for (int c = 0; c < COLS; c++) row[c] = pix[0][c];
    for (int r = 0; r < ROWS; r++) begin
      for (int g = 0; g < SHARE; g++) begin
        @(negedge clk);
        load = 0; row = '1;
        rd_valid = 1; rd_addr = 3'(r * SHARE + g); rd_phase = 1'(g);
        rd_first = (r == 0 && g == 0); rd_last = (r == ROWS - 1 && g == SHARE - 1);
        if (rd_last) begin q.push_back(reference()); t.push_back(cyc + 4); end
        if (g == SHARE - 1 && !gaps && r != ROWS - 1) begin
          // the next row is loaded in the cycle of this row's last read
          load = 1;
          for (int c = 0; c < COLS; c++) row[c] = pix[r + 1][c];
        end
      end
      if (gaps && r != ROWS - 1) begin
        @(negedge clk);
        rd_valid = 0; rd_first = 0; rd_last = 0;
        repeat ($urandom_range(3, 0)) @(negedge clk);
        load = 1;
        for (int c = 0; c < COLS; c++) row[c] = pix[r + 1][c];
      end
    end
    @(negedge clk); rd_valid = 0; rd_first = 0; rd_last = 0; load = 0;
  endtask

  initial begin
    load = 0; rd_valid = 0; rd_first = 0; rd_last = 0; rd_addr = 0; rd_phase = 0;
    wr_en = 0; wr_sel = 0; wr_addr = 0; wr_data = 0; row = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    for (int f = 0; f < 4; f++) frame(0);
    frame(1);
    repeat (10) @(negedge clk);
    load_weights();
    for (int f = 0; f < 3; f++) frame(f == 1);
    repeat (12) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_frames != 8 || n_reconf != 2) begin
      failures++; $display("frames %0d, pending %0d", n_frames, q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
