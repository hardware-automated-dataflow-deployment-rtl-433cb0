// conv_engine: one K x K convolution of a pixel neighbourhood with one fixed
// kernel (the "mac" / "conv_nc" unit).
//
// All K*K products are formed in parallel by constant multipliers, each
// specialised to its weight w[LAYER][N_IDX][C_IDX][p][q] from cnn_pkg, and summed
// by one registered adder tree. A new window is accepted every clock; the sum
// and out_valid follow one clock after win and in_valid. The sum keeps the full
// precision: 2*BITWIDTH product bits (2*FRAC fractional bits) plus
// ceil(log2(K*K)) growth bits. The parallel-multiplier-plus-tree structure
// follows the paper; the single register stage is this design's choice.
module conv_engine
  import cnn_pkg::*;
#(
  parameter int LAYER = 0,
  parameter int N_IDX = 0,
  parameter int C_IDX = 0,
  parameter int K     = 5,
  parameter int OUT_W = 2 * BITWIDTH + $clog2(K * K)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  pixel_t                  win [K][K],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);

  localparam int PW = 2 * BITWIDTH;

  logic signed [PW-1:0] prod [K*K];

  for (genvar p = 0; p < K; p++) begin : g_p
    for (genvar q = 0; q < K; q++) begin : g_q
      const_mult #(
        .WEIGHT(weight(LAYER, N_IDX, C_IDX, p, q)),
        .IN_W  (BITWIDTH),
        .OUT_W (PW)
      ) u_mult (
        .x(win[p][q]),
        .p(prod[p*K+q])
      );
    end
  end

  adder_tree #(.N_IN(K * K), .IN_W(PW), .OUT_W(OUT_W)) u_sum (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .din      (prod),
    .out_valid(out_valid),
    .sum      (sum)
  );

endmodule
