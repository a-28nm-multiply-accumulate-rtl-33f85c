// tb_accumulator: drives frames of random length (1 to 8 product vectors,
// including one-vector frames where first and last coincide) through the
// accumulator, back to back or with random gaps in in_valid. The expected
// frame sum is computed with the real-number reference in the same order as
// the hardware: FP16 tree (p0+p1)+p2, exact widening to FP17, FP17 running
// sum. Each result must arrive LEVELS+1 = 3 cycles after the frame's last
// vector. One frame of large values checks that the FP17 sum passes the
// FP16 range without saturating.
module tb_accumulator;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic             v, first, last, rv;
  logic [2:0][15:0] in;
  logic [16:0]      res;
  int checks = 0, failures = 0, n_big = 0, n_single = 0;
  int cyc = 0;

  accumulator #(.N(3)) dut (.clk, .rst_n, .in_valid(v), .in_first(first), .in_last(last),
                            .in(in), .res_valid(rv), .res(res));

  always #5 clk = ~clk;

  logic [16:0] q[$];
  int          t[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && rv) begin
      checks++;
      if (q.size() == 0 || q[0] !== res || t[0] != cyc) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: got %h exp %h due %0d", cyc, res,
                                    q.size() ? q[0] : 17'h0, t.size() ? t[0] : -1);
      end
      if (q.size() != 0) begin void'(q.pop_front()); void'(t.pop_front()); end
    end
  end

  task automatic frame(input int len, input bit big);
    logic [16:0] acc;
    logic [15:0] ps;
    for (int n = 0; n < len; n++) begin
      @(negedge clk);
      while ($urandom_range(3, 0) == 0) begin v = 0; @(negedge clk); end
      v = 1; first = (n == 0); last = (n == len - 1);
      for (int i = 0; i < 3; i++)
        in[i] = big ? {1'b0, 5'd30, 10'($urandom)}
                    : {1'($urandom), 5'($urandom_range(22, 8)), 10'($urandom)};
      ps  = ref_add16(ref_add16(in[0], in[1]), in[2]);
      acc = (n == 0) ? r_fp17(fp16_r(32'(ps))) : ref_add17(acc, r_fp17(fp16_r(32'(ps))));
      if (n == len - 1) begin
        q.push_back(acc);
        t.push_back(cyc + 3);
        if (fp17_r(32'(acc)) > 65504.0) n_big++;
      end
    end
    @(negedge clk); v = 0;
  endtask

  initial begin
    v = 0; first = 0; last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(8, 1);
    frame(1, 0);
    n_single++;
    for (int f = 0; f < 400; f++) frame($urandom_range(8, 1), 0);
    repeat (8) @(posedge clk);
    if (q.size() != 0) begin failures++; $display("results missing"); end
    if (n_big == 0) begin failures++; $display("FP16 range never exceeded"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
