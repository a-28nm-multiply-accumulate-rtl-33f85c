// tb_fp_add: checks the floating-point adder in both configurations used by
// the compressor, FP16 (e=5, m=10) and FP17 (e=6, m=10), against a real-number
// reference. Operands are random with exponents chosen close together (so
// that cancellation, carries and ties are frequent) or far apart, plus corner
// cases: zero operands, exact cancellation and FP16 saturation.
module tb_fp_add;
  import fp_ref_pkg::*;

  logic        clk = 0;
  logic [15:0] a16, b16, s16;
  logic [16:0] a17, b17, s17;
  int checks = 0, failures = 0;
  int n_cancel = 0, n_sub = 0;

  fp_add #(.E(5), .M(10)) dut16 (.a(a16), .b(b16), .s(s16));
  fp_add #(.E(6), .M(10)) dut17 (.a(a17), .b(b17), .s(s17));

  always #5 clk = ~clk;

  task automatic check16(input logic [15:0] x, input logic [15:0] y);
    logic [15:0] e;
    a16 = x; b16 = y;
    @(posedge clk); #1;
    e = ref_add16(x, y);
    checks++;
    if (x[15] != y[15]) n_sub++;
    if (e == 0 && x != 0) n_cancel++;
    if (s16 !== e) begin
      failures++;
      if (failures < 10) $display("FP16 MISMATCH %h + %h got %h exp %h", x, y, s16, e);
    end
  endtask

  task automatic check17(input logic [16:0] x, input logic [16:0] y);
    logic [16:0] e;
    a17 = x; b17 = y;
    @(posedge clk); #1;
    e = ref_add17(x, y);
    checks++;
    if (s17 !== e) begin
      failures++;
      if (failures < 10) $display("FP17 MISMATCH %h + %h got %h exp %h", x, y, s17, e);
    end
  endtask

  function automatic logic [15:0] r16(int emin, int emax);
    return {1'($urandom), 5'($urandom_range(emax, emin)), 10'($urandom)};
  endfunction
  function automatic logic [16:0] r17(int emin, int emax);
    return {1'($urandom), 6'($urandom_range(emax, emin)), 10'($urandom)};
  endfunction

  initial begin
    logic [15:0] x;
    logic [16:0] y;
    check16(0, 0);
    check16(16'h3C00, 0);
    check16(0, 16'hBC00);
    check16(16'h3C00, 16'hBC00);             // 1 - 1 = +0
    check16(16'h7BFF, 16'h7BFF);             // large + large, no saturation
    check16(16'h7FFF, 16'h7FFF);             // saturates
    check16(16'h3C00, 16'h0400);             // far apart
    check17(17'h0, 17'h0);
    check17(17'h0F800, 17'h1F800);           // 1 - 1
    for (int i = 0; i < 10000; i++) begin
      x = r16(1, 30);
      check16(x, {1'($urandom), 5'($urandom_range(x[14:10] > 1 ? x[14:10] - 1 : 1,
                                                  x[14:10] < 30 ? x[14:10] + 1 : 30)), 10'($urandom)});
      check16(r16(1, 31), r16(1, 31));
      y = r17(1, 62);
      check17(y, {1'($urandom), 6'($urandom_range(y[15:10] > 1 ? y[15:10] - 1 : 1,
                                                  y[15:10] < 62 ? y[15:10] + 1 : 62)), 10'($urandom)});
      check17(r17(1, 63), r17(1, 63));
    end
    // Exact cancellation of random values.
    for (int i = 0; i < 100; i++) begin
      x = r16(1, 30);
      check16(x, {~x[15], x[14:0]});
    end
    if (n_cancel == 0 || n_sub == 0) begin failures++; $display("mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
