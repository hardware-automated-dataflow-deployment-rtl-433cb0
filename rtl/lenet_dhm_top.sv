// lenet_dhm_top: the convolutional part of LeNet5 mapped directly onto hardware.
//
//   pixel stream (IMG_W x IMG_H, IN_C channels)
//     -> conv1: C1_N maps, C1_K x C1_K kernels   (28x28 -> 24x24, 20 maps)
//     -> pool1: max over POOL x POOL, stride POOL (24x24 -> 12x12)
//     -> conv2: C2_N maps, C2_K x C2_K kernels   (12x12 -> 8x8, 50 maps)
//     -> pool2: max over POOL x POOL, stride POOL (8x8 -> 4x4)
//     -> out_data: C2_N parallel pixel streams, to a classifier
//
// Every layer, neuron, convolution and multiplier has its own hardware, so all
// layers work at once on the same stream: one input pixel is taken every clock,
// with no external memory and no stall. Layer sizes are the LeNet5 column of the
// paper's topology table; the pooling size, the stream framing and the number
// format are this design's choices. Latency from the pixel that completes a
// final window to its output: 4 + 2 + 4 + 2 = 12 clocks.
//
// The streams carry one valid flag for all channels and no backpressure:
// in_valid may be low on any cycle, and a frame is exactly IMG_W*IMG_H valid
// pixels in raster order. Frames follow each other without any gap needed.
// Activation clipping events of both convolutional layers are brought out for
// monitoring.
module lenet_dhm_top
  import cnn_pkg::*;
#(
  parameter int IMG_W = 28,
  parameter int IMG_H = 28,
  parameter int IN_C  = 1,
  parameter int C1_N  = 20,
  parameter int C1_K  = 5,
  parameter int C2_N  = 50,
  parameter int C2_K  = 5,
  parameter int POOL  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  pixel_t          in_data  [IN_C],
  output logic            out_valid,
  output pixel_t          out_data [C2_N],
  output logic [C1_N-1:0] c1_clamp_neg,
  output logic [C1_N-1:0] c1_clamp_pos,
  output logic [C2_N-1:0] c2_clamp_neg,
  output logic [C2_N-1:0] c2_clamp_pos
);

  localparam int C1_W = IMG_W - C1_K + 1;
  localparam int C1_H = IMG_H - C1_K + 1;
  localparam int P1_W = (C1_W - POOL) / POOL + 1;
  localparam int P1_H = (C1_H - POOL) / POOL + 1;
  localparam int C2_W = P1_W - C2_K + 1;
  localparam int C2_H = P1_H - C2_K + 1;

  logic   c1_valid, p1_valid, c2_valid;
  pixel_t c1_data [C1_N];
  pixel_t p1_data [C1_N];
  pixel_t c2_data [C2_N];

  conv_layer #(.LAYER(0), .C(IN_C), .N(C1_N), .K(C1_K), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_conv1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_data(in_data),
    .out_valid(c1_valid), .out_data(c1_data),
    .clamp_neg(c1_clamp_neg), .clamp_pos(c1_clamp_pos)
  );

  maxpool_layer #(.C(C1_N), .POOL(POOL), .STRIDE(POOL), .IMG_W(C1_W), .IMG_H(C1_H)) u_pool1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(c1_valid), .in_data(c1_data),
    .out_valid(p1_valid), .out_data(p1_data)
  );

  conv_layer #(.LAYER(1), .C(C1_N), .N(C2_N), .K(C2_K), .IMG_W(P1_W), .IMG_H(P1_H)) u_conv2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(p1_valid), .in_data(p1_data),
    .out_valid(c2_valid), .out_data(c2_data),
    .clamp_neg(c2_clamp_neg), .clamp_pos(c2_clamp_pos)
  );

  maxpool_layer #(.C(C2_N), .POOL(POOL), .STRIDE(POOL), .IMG_W(C2_W), .IMG_H(C2_H)) u_pool2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(c2_valid), .in_data(c2_data),
    .out_valid(out_valid), .out_data(out_data)
  );

endmodule
