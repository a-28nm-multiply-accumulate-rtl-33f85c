// tb_sram_config: sends configuration packets (select, address, data; MSB
// first) bit by bit with random idle cycles on sen, and checks each write
// strobe's select, address and data one cycle after the packet's last bit.
// A truncated packet followed by sync must produce no write and must not
// disturb the next packet.
module tb_sram_config;
  localparam int N_SRAM = 6, DEPTH = 10, WIDTH = 16;
  localparam int PKT = 3 + 4 + WIDTH;

  logic clk = 0, rst_n = 0;
  logic sdi, sen, sync, wr_en;
  logic [2:0]  wr_sel;
  logic [3:0]  wr_addr;
  logic [15:0] wr_data;
  int checks = 0, failures = 0, n_wr = 0, n_sync = 0;
  logic [PKT-1:0] q[$];

  sram_config #(.N_SRAM(N_SRAM), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (
    .clk, .rst_n, .sdi, .sen, .sync, .wr_en, .wr_sel, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && wr_en) begin
    n_wr++;
    checks++;
    if (q.size() == 0 || {wr_sel, wr_addr, wr_data} !== q[0]) begin
      failures++;
      if (failures < 10) $display("write %h %h %h unexpected", wr_sel, wr_addr, wr_data);
    end
    if (q.size() != 0) void'(q.pop_front());
  end

  task automatic send_bits(input logic [PKT-1:0] p, input int nbits);
    for (int i = PKT - 1; i >= PKT - nbits; i--) begin
      @(negedge clk);
      while ($urandom_range(2, 0) == 0) begin sen = 0; sdi = 1'($urandom); @(negedge clk); end
      sen = 1; sdi = p[i];
    end
    @(negedge clk); sen = 0;
  endtask

  initial begin
    logic [PKT-1:0] p;
    sdi = 0; sen = 0; sync = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      p = {3'($urandom_range(N_SRAM - 1, 0)), 4'($urandom_range(DEPTH - 1, 0)), 16'($urandom)};
      if (n % 20 == 7) begin
        // truncated packet, then realign
        send_bits(p, $urandom_range(PKT - 1, 1));
        @(negedge clk); sync = 1; @(negedge clk); sync = 0;
        n_sync++;
      end
      q.push_back(p);
      send_bits(p, PKT);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_wr != 200) begin failures++; $display("writes missing: %0d", n_wr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
