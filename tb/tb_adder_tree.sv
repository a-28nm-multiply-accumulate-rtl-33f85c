// tb_adder_tree: streams random FP16 vectors through two pipelined adder
// trees, the 3-input tree of the compressor and a 5-input tree (odd carries
// at two levels), with random gaps in in_valid. Each output is compared with
// a real-number reference that adds in the same pairwise order, and each
// result must appear exactly LEVELS cycles after its inputs.
module tb_adder_tree;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic            v3, v5, ov3, ov5;
  logic [2:0][15:0] in3;
  logic [4:0][15:0] in5;
  logic [15:0]     o3, o5;
  int checks = 0, failures = 0;

  adder_tree #(.N(3)) dut3 (.clk, .rst_n, .in_valid(v3), .in(in3), .out_valid(ov3), .out(o3));
  adder_tree #(.N(5)) dut5 (.clk, .rst_n, .in_valid(v5), .in(in5), .out_valid(ov5), .out(o5));

  always #5 clk = ~clk;

  // expected value and the cycle it is due
  logic [15:0] q3[$], q5[$];
  int          t3[$], t5[$];
  int          cyc = 0;

  function automatic logic [15:0] rnd();
    return {1'($urandom), 5'($urandom_range(24, 6)), 10'($urandom)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (ov3) begin
        checks++;
        if (q3.size() == 0 || q3[0] !== o3 || t3[0] != cyc) begin
          failures++;
          if (failures < 10) $display("N=3 mismatch at %0d: got %h", cyc, o3);
        end
        if (q3.size() != 0) begin void'(q3.pop_front()); void'(t3.pop_front()); end
      end
      if (ov5) begin
        checks++;
        if (q5.size() == 0 || q5[0] !== o5 || t5[0] != cyc) begin
          failures++;
          if (failures < 10) $display("N=5 mismatch at %0d: got %h", cyc, o5);
        end
        if (q5.size() != 0) begin void'(q5.pop_front()); void'(t5.pop_front()); end
      end
    end
  end

  initial begin
    v3 = 0; v5 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      v3 = $urandom_range(3, 0) != 0;
      v5 = $urandom_range(3, 0) != 0;
      for (int i = 0; i < 3; i++) in3[i] = rnd();
      for (int i = 0; i < 5; i++) in5[i] = rnd();
      // cyc at the next posedge is cyc+1 (sampled by the checker as the old value)
      if (v3) begin
        q3.push_back(ref_add16(ref_add16(in3[0], in3[1]), in3[2]));
        t3.push_back(cyc + 2);
      end
      if (v5) begin
        q5.push_back(ref_add16(ref_add16(ref_add16(in5[0], in5[1]), ref_add16(in5[2], in5[3])), in5[4]));
        t5.push_back(cyc + 3);
      end
    end
    @(negedge clk); v3 = 0; v5 = 0;
    repeat (6) @(posedge clk);
    if (q3.size() != 0 || q5.size() != 0) begin failures++; $display("results missing"); end
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
