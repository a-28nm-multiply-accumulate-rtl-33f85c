// tb_fp_mult: checks the pixel x FP12 weight multiplier against a real-number
// reference (fp_ref_pkg), with corner cases (zero pixel, zero weight, the
// largest pixel and weight, products that underflow FP16) and 20000 random
// operand pairs. The multiplier is combinational; each pair is applied on a
// clock edge and checked before the next one.
module tb_fp_mult;
  import fp_ref_pkg::*;

  logic        clk = 0;
  logic [11:0] pix;
  logic [11:0] w;
  logic [15:0] p;
  int checks = 0, failures = 0;
  int n_flush = 0, n_round = 0;

  fp_mult dut (.pix(pix), .w(w), .p(p));

  always #5 clk = ~clk;

  task automatic check(input logic [11:0] px, input logic [11:0] wt);
    logic [15:0] exp_p;
    pix = px; w = wt;
    @(posedge clk); #1;
    exp_p = ref_mult(px, wt);
    checks++;
    if (exp_p == 0 && px != 0 && wt[10:6] != 0) n_flush++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("MISMATCH pix=%0d w=%h got %h exp %h", px, wt, p, exp_p);
    end
  endtask

  initial begin
    check(0, 12'h7C0);                 // zero pixel
    check(4095, 12'h000);              // zero weight
    check(4095, 12'h7FF);              // largest positive product
    check(4095, 12'hFFF);              // largest negative product
    check(1, {1'b0, 5'd31, 6'd0});     // 1 x 1.0
    check(1, {1'b0, 5'd1, 6'd5});      // underflows FP16 -> 0
    check(2047, {1'b0, 5'd31, 6'd63}); // needs rounding
    check(2049, {1'b1, 5'd30, 6'd1});
    for (int i = 0; i < 20000; i++)
      check($urandom_range(4095, 0), rand_w(31));
    if (n_flush == 0) begin failures++; $display("no underflow case seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
