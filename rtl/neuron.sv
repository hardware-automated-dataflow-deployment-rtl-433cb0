// neuron: computes one output feature map of a convolutional layer.
//
// It holds C convolution engines, one per input channel, each with its own
// kernel w[LAYER][N_IDX][c]. Their C sums and the bias b[LAYER][N_IDX] (shifted
// left by FRAC to match the products' format) are added by one adder tree, and
// the total goes through the activation block. The structure follows the
// paper's neuron: conv engines, a summation with the bias, then act.
//
// Inputs are the C windows of one pixel position, all valid together. Latency is
// three clocks (engine sum, neuron sum, activation); one window set is accepted
// per clock. clamped_neg/clamped_pos report the activation's clipping events.
module neuron
  import cnn_pkg::*;
#(
  parameter int LAYER = 0,
  parameter int N_IDX = 0,
  parameter int C     = 1,
  parameter int K     = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pixel_t win [C][K][K],
  output logic   out_valid,
  output pixel_t dout,
  output logic   clamped_neg,
  output logic   clamped_pos
);

  localparam int EW = 2 * BITWIDTH + $clog2(K * K);   // engine sum width
  localparam int SW = EW + $clog2(C + 1);             // neuron sum width

  logic signed [EW-1:0] eng_sum [C+1];
  logic [C-1:0]         eng_valid;
  logic signed [SW-1:0] total;
  logic                 total_valid;

  for (genvar c = 0; c < C; c++) begin : g_conv
    conv_engine #(
      .LAYER(LAYER), .N_IDX(N_IDX), .C_IDX(c), .K(K), .OUT_W(EW)
    ) u_conv (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .win      (win[c]),
      .out_valid(eng_valid[c]),
      .sum      (eng_sum[c])
    );
  end

  // Bias in the products' format (2*FRAC fractional bits).
  assign eng_sum[C] = EW'(bias(LAYER, N_IDX) * (1 << FRAC));

  adder_tree #(.N_IN(C + 1), .IN_W(EW), .OUT_W(SW)) u_sum (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (eng_valid[0]),
    .din      (eng_sum),
    .out_valid(total_valid),
    .sum      (total)
  );

  activation #(.IN_W(SW)) u_act (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (total_valid),
    .din        (total),
    .out_valid  (out_valid),
    .dout       (dout),
    .clamped_neg(clamped_neg),
    .clamped_pos(clamped_pos)
  );

endmodule
