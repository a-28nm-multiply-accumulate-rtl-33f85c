// accumulator: sums the products of one principal component over a frame.
//
// Each cycle the N FP16 products of one column group enter a pipelined
// adder tree (one register per level). The tree's FP16 partial sum is
// widened exactly to FP17 (e=6: exponent range -31..31) and added to the
// accumulation register by an FP17 adder, so the 12x168 products of a frame
// cannot overflow. The tree, its per-level pipeline registers, the FP17
// width of the last adder and the accumulation register with its feedback
// follow the paper.
//
// Frame boundaries are this design's choice: in_first marks the first
// products of a frame, in_last the last. On the first, the register is
// loaded with the partial sum instead of adding to it; on the last, the
// finished sum goes to the output register res and res_valid pulses for one
// cycle. Frames can therefore follow each other with no idle cycle.
// Timing: res_valid rises LEVELS + 1 cycles after the in_last input
// (LEVELS = ceil(log2 N)). Inputs without in_valid are ignored.
module accumulator #(
  parameter int unsigned N  = 3,
  parameter int unsigned E  = 5,
  parameter int unsigned M  = 10,
  parameter int unsigned AE = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [N-1:0][E+M:0] in,
  output logic                res_valid,
  output logic [AE+M:0]       res
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned REBIAS = ((1 << (AE - 1)) - 1) - ((1 << (E - 1)) - 1);

  logic              t_valid;
  logic [E+M:0]      t_sum;
  logic [LEVELS-1:0] first_d, last_d;
  logic [AE+M:0]     x, acc, acc_sum;

  adder_tree #(.N(N), .E(E), .M(M)) u_tree (
    .clk, .rst_n, .in_valid, .in, .out_valid(t_valid), .out(t_sum)
  );

  // Frame tags travel beside the tree.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      first_d <= '0;
      last_d  <= '0;
    end else begin
      first_d <= LEVELS'({first_d, in_first & in_valid});
      last_d  <= LEVELS'({last_d,  in_last  & in_valid});
    end

  // Exact widening of the partial sum to the accumulation format.
  assign x = (t_sum[M +: E] == '0) ? '0
           : {t_sum[E+M], AE'(t_sum[M +: E]) + AE'(REBIAS), t_sum[M-1:0]};

  fp_add #(.E(AE), .M(M)) u_acc_add (.a(acc), .b(x), .s(acc_sum));

  always_ff @(posedge clk)
    if (t_valid) begin
      acc <= first_d[LEVELS-1] ? x : acc_sum;
      if (last_d[LEVELS-1]) res <= first_d[LEVELS-1] ? x : acc_sum;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= t_valid & last_d[LEVELS-1];

endmodule
