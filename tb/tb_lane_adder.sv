// tb_lane_adder: a lane adder with NB = 4 blocks and K = 3 components
// receives random FP17 partial results, one set per cycle or with gaps, and
// each output must equal the reference pairwise sum ((b0+b1)+(b2+b3)),
// exactly ceil(log2 NB) = 2 cycles after its inputs.
module tb_lane_adder;
  import fp_ref_pkg::*;
  localparam int NB = 4, K = 3;

  logic clk = 0, rst_n = 0;
  logic v, ov;
  logic [K-1:0][NB-1:0][16:0] in;
  logic [K-1:0][16:0] out;
  int checks = 0, failures = 0;
  int cyc = 0;

  lane_adder #(.NB(NB), .K(K)) dut (.clk, .rst_n, .in_valid(v), .in, .out_valid(ov), .out);

  always #5 clk = ~clk;

  logic [K-1:0][16:0] q[$];
  int                 t[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ov) begin
      checks++;
      if (q.size() == 0 || q[0] !== out || t[0] != cyc) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d", cyc);
      end
      if (q.size() != 0) begin void'(q.pop_front()); void'(t.pop_front()); end
    end
  end

  initial begin
    logic [K-1:0][16:0] e;
    v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      v = $urandom_range(2, 0) != 0;
      for (int k = 0; k < K; k++) begin
        for (int b = 0; b < NB; b++) in[k][b] = {1'($urandom), 6'($urandom_range(50, 20)), 10'($urandom)};
        e[k] = ref_add17(ref_add17(in[k][0], in[k][1]), ref_add17(in[k][2], in[k][3]));
      end
      if (v) begin q.push_back(e); t.push_back(cyc + 2); end
    end
    @(negedge clk); v = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("results missing"); end
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
