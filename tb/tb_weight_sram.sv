// tb_weight_sram: fills a full-size 672x144 weight SRAM with a pattern
// computed from the address, reads every word back in random order checking
// the one-cycle read latency, then overwrites random words and checks that a
// write cycle leaves the read data register unchanged.
module tb_weight_sram;
  logic clk = 0;
  logic         we;
  logic [9:0]   addr;
  logic [143:0] wdata, rdata;
  logic [143:0] model [672];
  int checks = 0, failures = 0;

  weight_sram dut (.clk, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  function automatic logic [143:0] pat(int a, int salt);
    logic [143:0] r;
    for (int i = 0; i < 9; i++) r[i*16 +: 16] = 16'(a * 40503 + i * 977 + salt * 7919);
    return r;
  endfunction

  initial begin
    logic [143:0] held;
    we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 672; a++) begin
      @(negedge clk); we = 1; addr = 10'(a); wdata = pat(a, 0); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom_range(671, 0);
      @(negedge clk); we = 0; addr = 10'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h", a, rdata);
      end
      if (n % 4 == 0) begin
        automatic int b = $urandom_range(671, 0);
        held = rdata;
        @(negedge clk); we = 1; addr = 10'(b); wdata = pat(b, n); model[b] = wdata;
        @(posedge clk); #1;
        checks++;
        if (rdata !== held) begin failures++; $display("rdata changed on write"); end
      end
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
