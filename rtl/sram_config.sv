// sram_config: loads the weight SRAMs from a single-bit serial stream.
//
// The encoding weights are generated off chip and written into the weight
// SRAMs before operation (and again whenever they are updated). They arrive
// as a one-bit stream: sdi carries one bit per clock in which sen is high.
// Every PKT_W = SELW + AW + WIDTH bits form one packet, most significant bit
// first:
//     [ SRAM select (SELW) | word address (AW) | word data (WIDTH) ]
// When the last bit of a packet arrives, the select, address and data are
// driven to all SRAMs with a one-cycle wr_en; each SRAM writes only when
// wr_sel equals its own index. sync (high for one cycle between packets)
// clears the bit counter, so a transmitter can realign after a glitch.
// The serial stream, the split into address and data segments and the
// broadcast to all SRAMs follow the paper; the packet layout, sen and sync
// are this design's choices.
// Timing: wr_en is registered, one cycle after the packet's last bit.
module sram_config #(
  parameter int unsigned N_SRAM = 768,
  parameter int unsigned DEPTH  = 672,
  parameter int unsigned WIDTH  = 144,
  localparam int unsigned SELW  = (N_SRAM > 1) ? $clog2(N_SRAM) : 1,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned PKT_W = SELW + AW + WIDTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sdi,
  input  logic             sen,
  input  logic             sync,
  output logic             wr_en,
  output logic [SELW-1:0]  wr_sel,
  output logic [AW-1:0]    wr_addr,
  output logic [WIDTH-1:0] wr_data
);
  logic [PKT_W-1:0]         shreg;
  logic [$clog2(PKT_W)-1:0] cnt;
  logic [PKT_W-1:0]         pkt;

  assign pkt = {shreg[PKT_W-2:0], sdi};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt   <= '0;
      wr_en <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      if (sync) begin
        cnt <= '0;
      end else if (sen) begin
        if (cnt == ($clog2(PKT_W))'(PKT_W - 1)) begin
          cnt   <= '0;
          wr_en <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end

  always_ff @(posedge clk) begin
    if (sen && !sync) shreg <= pkt;
    if (sen && !sync && cnt == ($clog2(PKT_W))'(PKT_W - 1))
      {wr_sel, wr_addr, wr_data} <= pkt;
  end

endmodule
