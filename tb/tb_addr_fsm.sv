// tb_addr_fsm: drives an address FSM with 5-row frames and 4-fold sharing.
// The testbench keeps its own schedule: for each accepted row r it expects
// reads at addresses 4r..4r+3 in the four cycles that follow, with phase,
// first (row 0, phase 0) and last (row 4, phase 3) tags. Rows are sent back
// to back (every 4 cycles) and with gaps. It also provokes each error case:
// dv during a row (data_err, row dropped), sof in the middle of a frame
// (frame_err, restart at row 0) and a row without sof at a frame start
// (frame_err, row dropped), and checks that every error pulse was expected.
module tb_addr_fsm;
  localparam int ROWS = 5, SHARE = 4;

  logic clk = 0, rst_n = 0;
  logic       dv, sof, load, rd_valid, rd_first, rd_last, data_err, frame_err;
  logic [4:0] rd_addr;
  logic [1:0] rd_phase;
  int checks = 0, failures = 0;
  int n_derr = 0, n_ferr = 0, n_frames = 0;
  int cyc = 0;

  addr_fsm #(.ROWS(ROWS), .SHARE(SHARE)) dut (.clk, .rst_n, .dv, .sof, .load, .rd_valid, .rd_addr,
                                             .rd_phase, .rd_first, .rd_last, .data_err, .frame_err);

  always #5 clk = ~clk;

  int exp_addr [int];        // cycle -> expected address
  bit exp_derr [int];
  bit exp_ferr [int];
  int row_next = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      checks++;
      if (rd_valid != exp_addr.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: rd_valid %0d unexpected", cyc, rd_valid);
      end else if (rd_valid) begin
        automatic int a = exp_addr[cyc];
        if (rd_addr != 5'(a) || rd_phase != 2'(a % 4) || rd_first != (a == 0) ||
            rd_last != (a == ROWS * SHARE - 1)) begin
          failures++;
          if (failures < 10) $display("cycle %0d: addr %0d exp %0d", cyc, rd_addr, a);
        end
        if (rd_last) n_frames++;
      end
      checks++;
      if (data_err != exp_derr.exists(cyc) || frame_err != exp_ferr.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: error flags %0d %0d", cyc, data_err, frame_err);
      end
      n_derr += data_err;
      n_ferr += frame_err;
    end
  end

  // Send one dv (with sof as given) at the next cycle; `busy` tells the
  // testbench whether the FSM should reject it.
  task automatic send(input bit s, input bit busy);
    @(negedge clk);
    dv = 1; sof = s;
    if (busy) exp_derr[cyc] = 1;
    else if (s) begin
      if (row_next != 0) exp_ferr[cyc] = 1;
      for (int p = 0; p < SHARE; p++) exp_addr[cyc + 1 + p] = p;
      row_next = 1;
    end else if (row_next == 0) exp_ferr[cyc] = 1;
    else begin
      for (int p = 0; p < SHARE; p++) exp_addr[cyc + 1 + p] = row_next * SHARE + p;
      row_next = (row_next + 1) % ROWS;
    end
    @(negedge clk); dv = 0; sof = 0;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    dv = 0; sof = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(2);
    // three back-to-back frames: dv every SHARE cycles
    for (int f = 0; f < 3; f++)
      for (int r = 0; r < ROWS; r++) begin send(r == 0, 0); idle(SHARE - 2); end
    idle(3);
    // a frame with gaps between rows
    for (int r = 0; r < ROWS; r++) begin send(r == 0, 0); idle($urandom_range(6, 3)); end
    // data error: dv two cycles into a row
    send(1, 0); send(0, 1); idle(3);
    send(0, 0); idle(3);
    // frame error: sof in the middle of the frame, then a full frame
    send(1, 0); idle(3);
    for (int r = 1; r < ROWS; r++) begin send(0, 0); idle(3); end
    // frame error: row without sof at frame start (dropped)
    send(0, 0); idle(3);
    for (int r = 0; r < ROWS; r++) begin send(r == 0, 0); idle(3); end
    idle(6);
    if (n_derr == 0 || n_ferr < 2 || n_frames < 5) begin
      failures++; $display("missing mechanism: derr %0d ferr %0d frames %0d", n_derr, n_ferr, n_frames);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
