// tb_mult_bank: applies random pixels and FP12 weights to a 3-wide
// multiplier bank every cycle and checks that each registered product equals
// the real-number reference one cycle later.
module tb_mult_bank;
  import fp_ref_pkg::*;

  logic clk = 0;
  logic [2:0][11:0] pix;
  logic [2:0][11:0] w;
  logic [2:0][15:0] p;
  logic [2:0][15:0] exp_p, exp_q;
  int checks = 0, failures = 0;

  mult_bank #(.N(3)) dut (.clk, .pix, .w, .p);

  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        pix[i]   = 12'($urandom);
        w[i]     = rand_w(20);
        exp_p[i] = ref_mult(pix[i], w[i]);
      end
      @(posedge clk); #1;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (p[i] !== exp_p[i]) begin
          failures++;
          if (failures < 10) $display("lane %0d: got %h exp %h", i, p[i], exp_p[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
