// conv_layer: one convolutional layer mapped entirely onto hardware.
//
// The layer receives C input feature maps as C parallel pixel streams sharing one
// valid flag and produces N output feature maps the same way. Following the
// neighbourhood-extraction factorisation, there is one neighbourhood extractor
// per input channel, and its window is shared by all N neurons (instead of one
// extractor per convolution), dividing the line-buffer memory by N. Every neuron
// holds C convolution engines, so the layer has N*C engines and N*C*K*K constant
// multipliers, all working every clock.
//
// Output maps are (IMG_W-K+1) x (IMG_H-K+1) ('valid' convolution, no padding), in
// raster order. Latency: 4 clocks from the pixel that completes a window to its
// output (extractor 1, neuron 3). Throughput: one input pixel per clock, with
// any pattern of idle cycles. Weights come from cnn_pkg, indexed by LAYER.
// clamp_neg/clamp_pos flag, per output map, that the activation clipped.
module conv_layer
  import cnn_pkg::*;
#(
  parameter int LAYER = 0,
  parameter int C     = 1,
  parameter int N     = 20,
  parameter int K     = 5,
  parameter int IMG_W = 28,
  parameter int IMG_H = 28
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  pixel_t       in_data [C],
  output logic         out_valid,
  output pixel_t       out_data [N],
  output logic [N-1:0] clamp_neg,
  output logic [N-1:0] clamp_pos
);

  pixel_t       win [C][K][K];
  logic [C-1:0] win_valid;
  logic [N-1:0] n_valid;

  for (genvar c = 0; c < C; c++) begin : g_ne
    neighborhood_extractor #(.K(K), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ne (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_data  (in_data[c]),
      .win      (win[c]),
      .win_valid(win_valid[c]),
      .win_col  (),
      .win_row  ()
    );
  end

  for (genvar n = 0; n < N; n++) begin : g_neuron
    neuron #(.LAYER(LAYER), .N_IDX(n), .C(C), .K(K)) u_neuron (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (win_valid[0]),
      .win        (win),
      .out_valid  (n_valid[n]),
      .dout       (out_data[n]),
      .clamped_neg(clamp_neg[n]),
      .clamped_pos(clamp_pos[n])
    );
  end

  assign out_valid = n_valid[0];

  // All extractors see the same stream and all neurons have the same latency,
  // so their valid flags must agree on every clock.
  a_win_valid_agree : assert property (@(posedge clk) disable iff (!rst_n)
    (win_valid == '0) || (win_valid == '1));
  a_neuron_valid_agree : assert property (@(posedge clk) disable iff (!rst_n)
    (n_valid == '0) || (n_valid == '1));

endmodule
