// tb_facedetect_chain: the layer modules chained like the three-layer face
// detector (7x7 kernels, pooling, 7x7 kernels, pooling, 3x3 kernels), at reduced
// size: a 34x30 single-channel input and 2, 3 and 4 maps. The top module has
// two layers, so this test builds the chain itself from conv_layer and
// maxpool_layer. Two random frames are streamed, the second with random idle
// cycles; the 2x1x4 outputs of each frame are compared with a software model,
// and the gap-free first frame must end 16 clocks (4+2+4+2+4) after its last
// pixel.
module tb_facedetect_chain;
  import cnn_pkg::*;
  import tb_cnn_ref_pkg::*;

  localparam int W0 = 34, H0 = 30;
  localparam int N1 = 2, K1 = 7, N2 = 3, K2 = 7, N3 = 4, K3 = 3, P = 2;
  localparam int W1 = W0 - K1 + 1, H1 = H0 - K1 + 1;          // conv1
  localparam int W2 = (W1 - P) / P + 1, H2 = (H1 - P) / P + 1;  // pool1
  localparam int W3 = W2 - K2 + 1, H3 = H2 - K2 + 1;          // conv2
  localparam int W4 = (W3 - P) / P + 1, H4 = (H3 - P) / P + 1;  // pool2
  localparam int W5 = W4 - K3 + 1, H5 = H4 - K3 + 1;          // conv3
  localparam int NPIX = W5 * H5, FRAMES = 2, LAT = 16;

  logic   clk = 0, rst_n = 0, in_valid = 0;
  pixel_t in_data [1];
  logic   v1, v2, v3, v4, v5;
  pixel_t d1 [N1];
  pixel_t d2 [N1];
  pixel_t d3 [N2];
  pixel_t d4 [N2];
  pixel_t d5 [N3];
  logic [N1-1:0] cn1, cp1;
  logic [N2-1:0] cn2, cp2;
  logic [N3-1:0] cn3, cp3;

  int checks = 0, failures = 0, cyc = 0, n_out = 0, last_in = 0, last_out = -1;
  map_t img [FRAMES];
  map_t ref_out [FRAMES];

  conv_layer #(.LAYER(0), .C(1), .N(N1), .K(K1), .IMG_W(W0), .IMG_H(H0)) u_c1 (
    .clk, .rst_n, .in_valid, .in_data, .out_valid(v1), .out_data(d1), .clamp_neg(cn1), .clamp_pos(cp1));
  maxpool_layer #(.C(N1), .POOL(P), .STRIDE(P), .IMG_W(W1), .IMG_H(H1)) u_p1 (
    .clk, .rst_n, .in_valid(v1), .in_data(d1), .out_valid(v2), .out_data(d2));
  conv_layer #(.LAYER(1), .C(N1), .N(N2), .K(K2), .IMG_W(W2), .IMG_H(H2)) u_c2 (
    .clk, .rst_n, .in_valid(v2), .in_data(d2), .out_valid(v3), .out_data(d3), .clamp_neg(cn2), .clamp_pos(cp2));
  maxpool_layer #(.C(N2), .POOL(P), .STRIDE(P), .IMG_W(W3), .IMG_H(H3)) u_p2 (
    .clk, .rst_n, .in_valid(v3), .in_data(d3), .out_valid(v4), .out_data(d4));
  conv_layer #(.LAYER(2), .C(N2), .N(N3), .K(K3), .IMG_W(W4), .IMG_H(H4)) u_c3 (
    .clk, .rst_n, .in_valid(v4), .in_data(d4), .out_valid(v5), .out_data(d5), .clamp_neg(cn3), .clamp_pos(cp3));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    map_t m;
    in_data[0] = '0;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[W0 * H0];
      foreach (img[f][i]) img[f][i] = int'($urandom_range(PIX_MAX, 0));
      m = conv_ref(0, 1, N1, K1, W0, H0, img[f]);
      m = pool_ref(N1, P, P, W1, H1, m);
      m = conv_ref(1, N1, N2, K2, W2, H2, m);
      m = pool_ref(N2, P, P, W3, H3, m);
      ref_out[f] = conv_ref(2, N2, N3, K3, W4, H4, m);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < W0 * H0; i++) begin
        @(negedge clk);
        while (f > 0 && $urandom_range(3, 0) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_data[0] = pixel_t'(img[f][i]);
        if (f == 0) last_in = cyc;
      end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 10) @(negedge clk);
    checks++;
    if (n_out != FRAMES * NPIX) begin
      failures++;
      $display("FAIL: %0d output pixels, expected %0d", n_out, FRAMES * NPIX);
    end
    checks++;
    if (last_out != last_in + LAT) begin
      failures++;
      $display("FAIL: latency: last output at %0d, last pixel at %0d", last_out, last_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && v5) begin
      int f, k;
      f = n_out / NPIX;
      k = n_out % NPIX;
      if (f == 0 && k == NPIX - 1) last_out = cyc;
      for (int n = 0; n < N3; n++) begin
        checks++;
        if (f >= FRAMES || int'(d5[n]) != ref_out[f][n*NPIX + k]) begin
          failures++;
          $display("FAIL: frame %0d pixel %0d map %0d: %0d", f, k, n, d5[n]);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
