// tb_conv_layer: a layer with C=2 inputs, N=3 outputs and 3x3 kernels on a 7x6
// image. Three random frames are streamed back to back, the later ones with
// random idle cycles. Outputs, in raster order, are compared with a direct
// software convolution; the first frame, fed without gaps, must produce its
// last output exactly 4 clocks after its last pixel.
module tb_conv_layer;
  import cnn_pkg::*;
  import tb_cnn_ref_pkg::*;
  localparam int C = 2, N = 3, K = 3, W = 7, H = 6, FRAMES = 3, LAYER = 0;
  localparam int OW = W - K + 1, OH = H - K + 1, LAT = 4;

  logic   clk = 0, rst_n = 0, in_valid = 0;
  pixel_t in_data [C];
  logic   out_valid;
  pixel_t out_data [N];
  logic [N-1:0] clamp_neg, clamp_pos;

  int checks = 0, failures = 0, cyc = 0, n_out = 0, n_idle = 0, last_in = 0, last_out = -1;
  map_t img [FRAMES];
  map_t ref_out [FRAMES];

  conv_layer #(.LAYER(LAYER), .C(C), .N(N), .K(K), .IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    foreach (in_data[c]) in_data[c] = '0;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[C * H * W];
      foreach (img[f][i]) img[f][i] = rand_pix();
      ref_out[f] = conv_ref(LAYER, C, N, K, W, H, img[f]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < H * W; i++) begin
        @(negedge clk);
        while (f > 0 && $urandom_range(3, 0) == 0) begin
          in_valid = 0;
          n_idle++;
          @(negedge clk);
        end
        in_valid = 1;
        for (int c = 0; c < C; c++) in_data[c] = pixel_t'(img[f][c*H*W + i]);
        if (f == 0) last_in = cyc;
      end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != FRAMES * OW * OH || n_idle == 0) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", n_out, FRAMES * OW * OH);
    end
    checks++;
    if (last_out != last_in + LAT) begin
      failures++;
      $display("FAIL: frame 0 ended at %0d, last pixel at %0d", last_out, last_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int f, k;
      f = n_out / (OW * OH);
      k = n_out % (OW * OH);
      if (f == 0 && k == OW * OH - 1) last_out = cyc;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (f >= FRAMES || int'(out_data[n]) != ref_out[f][n*OW*OH + k]) begin
          failures++;
          $display("FAIL: frame %0d pixel %0d map %0d: %0d", f, k, n, out_data[n]);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
