// adder_tree: sums N_IN signed operands and registers the result.
//
// The operands are sign-extended to OUT_W bits and added pairwise in a balanced
// binary tree of ceil(log2(N_IN)) levels (missing leaves are zero). Only the
// final sum is registered, so the result and out_valid appear one clock after
// the operands and in_valid; one new set of operands is accepted every clock.
// The caller chooses OUT_W wide enough for the sum (IN_W + ceil(log2(N_IN)));
// the tree never saturates. The tree shape and its single register stage are
// this design's choice: the paper shows the summation only as one node.
module adder_tree #(
  parameter int N_IN  = 25,
  parameter int IN_W  = 10,
  parameter int OUT_W = IN_W + $clog2(N_IN)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  din [N_IN],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);

  localparam int LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0;
  localparam int LEAVES = 1 << LEVELS;

  logic signed [OUT_W-1:0] t [LEAVES];
  logic signed [OUT_W-1:0] tree_sum;

  // Level by level, t[i] = t[2i] + t[2i+1]; after LEVELS levels t[0] is the sum.
  always_comb begin
    for (int i = 0; i < LEAVES; i++)
      t[i] = (i < N_IN) ? OUT_W'(din[i]) : '0;
    for (int w = LEAVES / 2; w >= 1; w = w / 2)
      for (int i = 0; i < w; i++)
        t[i] = t[2*i] + t[2*i+1];
    tree_sum = t[0];
  end

  always_ff @(posedge clk) begin
    sum <= tree_sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
