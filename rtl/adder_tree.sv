// adder_tree: pipelined floating-point reduction of N values to one.
//
// The summation levels of an accumulator (paper: log2 N levels, each
// followed by a pipelining register so that the critical path does not grow
// with the number of levels). Level l adds element 2i to element 2i+1 of
// level l-1; an odd element at the end of a level is carried to the next one
// through a register. With LEVELS = ceil(log2 N) levels, the sum of the
// inputs presented with in_valid appears LEVELS cycles later with out_valid.
// The tree is fully pipelined: a new set of inputs can enter every cycle.
// The pairing order and the register-only carry of odd elements are this
// design's choices; the level count and the per-level registers follow the
// paper.
module adder_tree #(
  parameter int unsigned N = 3,
  parameter int unsigned E = 5,
  parameter int unsigned M = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [N-1:0][E+M:0]  in,
  output logic                 out_valid,
  output logic [E+M:0]         out
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  // Number of elements at level l (level 0 = the inputs).
  function automatic int unsigned count(int unsigned l);
    int unsigned c = N;
    for (int unsigned j = 0; j < l; j++) c = (c + 1) / 2;
    return c;
  endfunction

  logic [E+M:0] src [LEVELS][N];   // inputs of each level
  logic [E+M:0] sum [LEVELS][N];   // adder outputs of each level
  logic [E+M:0] q   [LEVELS][N];   // pipeline register after each level
  logic [LEVELS-1:0] vld;

  always_comb begin
    for (int l = 0; l < LEVELS; l++)
      for (int i = 0; i < N; i++)
        src[l][i] = (l == 0) ? in[i] : q[(l > 0) ? l - 1 : 0][i];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar i = 0; i < N; i++) begin : g_node
      if (i < count(l + 1) && 2 * i + 1 < count(l)) begin : g_add
        fp_add #(.E(E), .M(M)) u_add (.a(src[l][2*i]), .b(src[l][2*i+1]), .s(sum[l][i]));
      end else begin : g_none
        assign sum[l][i] = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LEVELS; l++)
      for (int i = 0; i < N; i++)
        if (i >= int'(count(l + 1)))  q[l][i] <= '0;
        else if (2 * i + 1 < int'(count(l))) q[l][i] <= sum[l][i];
        else                          q[l][i] <= src[l][2*i];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else        vld <= LEVELS'({vld, in_valid});

  assign out       = q[LEVELS-1][0];
  assign out_valid = vld[LEVELS-1];

endmodule
