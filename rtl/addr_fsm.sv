// addr_fsm: address generator and frame sequencer of the compressor.
//
// Rows arrive one per dv pulse; with SHARE-fold logic sharing each accepted
// row occupies SHARE consecutive cycles of the datapath, one per column
// group. For each of those cycles the FSM issues a weight-SRAM read at
// address row*SHARE + phase (the words of a row are consecutive), together
// with the phase (mux select) and first/last-of-frame tags that travel
// down the pipeline to the accumulators. A frame is ROWS rows; sof marks
// the dv of its first row.
//
// Synchronisation errors (the paper says the FSM flags data and frame
// sequence errors; which cases count is this design's choice):
//   data_err  - dv while phases of the previous row are still being issued;
//               the new row is dropped.
//   frame_err - sof before the current frame's last row (the partial frame
//               is abandoned and a new one starts at row 0), or dv without
//               sof where a frame must start (the row is dropped).
// Both are one-cycle pulses in the cycle of the offending dv.
//
// Timing: load is combinational (dv accepted this cycle, so the row can be
// captured); rd_* are registered and show phase 0 the cycle after load, so
// rows can be accepted every SHARE cycles. Reset: asynchronous, active low.
module addr_fsm #(
  parameter int unsigned ROWS  = 168,
  parameter int unsigned SHARE = 4,
  localparam int unsigned AW   = $clog2(ROWS * SHARE),
  localparam int unsigned SW   = (SHARE > 1) ? $clog2(SHARE) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          dv,
  input  logic          sof,
  output logic          load,
  output logic          rd_valid,
  output logic [AW-1:0] rd_addr,
  output logic [SW-1:0] rd_phase,
  output logic          rd_first,
  output logic          rd_last,
  output logic          data_err,
  output logic          frame_err
);
  typedef enum logic [1:0] {IDLE, ISSUE} state_t;

  state_t        state;
  logic [RW-1:0] row_next;   // index the next row without sof will get
  logic [RW-1:0] row_cur;    // row whose phases are being issued
  logic          busy;       // more phases of the current row to issue
  logic          start;      // dv accepted with a valid row index
  logic [RW-1:0] row_new;

  assign busy = (state == ISSUE) && (rd_phase != SW'(SHARE - 1));

  always_comb begin
    data_err  = 1'b0;
    frame_err = 1'b0;
    start     = 1'b0;
    row_new   = row_next;
    if (dv) begin
      if (busy) begin
        data_err = 1'b1;
      end else if (sof) begin
        start     = 1'b1;
        row_new   = '0;
        frame_err = (row_next != '0);
      end else if (row_next == '0) begin
        frame_err = 1'b1;
      end else begin
        start = 1'b1;
      end
    end
  end

  assign load = start;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= IDLE;
      row_next <= '0;
      row_cur  <= '0;
      rd_phase <= '0;
    end else if (busy) begin
      rd_phase <= rd_phase + 1'b1;
    end else if (start) begin
      state    <= ISSUE;
      row_cur  <= row_new;
      row_next <= (row_new == RW'(ROWS - 1)) ? '0 : row_new + 1'b1;
      rd_phase <= '0;
    end else begin
      state    <= IDLE;
    end

  assign rd_valid = (state == ISSUE);
  assign rd_addr  = AW'(row_cur) * AW'(SHARE) + AW'(rd_phase);
  assign rd_first = rd_valid && row_cur == '0 && rd_phase == '0;
  assign rd_last  = rd_valid && row_cur == RW'(ROWS - 1) && rd_phase == SW'(SHARE - 1);

  // A row is never started while the previous one still has phases to issue.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
  // Every issued read addresses a word inside the weight SRAM.
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> rd_addr < AW'(ROWS * SHARE));

endmodule
