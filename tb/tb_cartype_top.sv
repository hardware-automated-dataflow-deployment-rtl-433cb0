// tb_cartype_top: the same two-layer pipeline shaped like the CarType network
// (3-channel colour input, 5x5 kernels, 2x2 max pooling after each layer), at
// reduced size: a 24x24x3 input, 4 maps in conv1, 4 maps in conv2. It exercises
// multi-channel input, which the LeNet5 configuration (one channel) does not.
// Checks and mechanism counts are those of the LeNet5 end-to-end test.
module tb_cartype_top;
  import cnn_pkg::*;
  import tb_cnn_ref_pkg::*;

  localparam int IMG_W = 24, IMG_H = 24, IN_C = 3;
  localparam int C1_N = 4, C1_K = 5, C2_N = 4, C2_K = 5, POOL = 2;
  localparam int FRAMES = 3;
  localparam int WATCHDOG = 20000;

  localparam int C1_W = IMG_W - C1_K + 1, C1_H = IMG_H - C1_K + 1;
  localparam int P1_W = (C1_W - POOL) / POOL + 1, P1_H = (C1_H - POOL) / POOL + 1;
  localparam int C2_W = P1_W - C2_K + 1, C2_H = P1_H - C2_K + 1;
  localparam int OW = (C2_W - POOL) / POOL + 1, OH = (C2_H - POOL) / POOL + 1;
  localparam int NPIX = OW * OH, LAT = 12;

  logic            clk = 0, rst_n = 0, in_valid = 0;
  pixel_t          in_data [IN_C];
  logic            out_valid;
  pixel_t          out_data [C2_N];
  logic [C1_N-1:0] c1_clamp_neg, c1_clamp_pos;
  logic [C2_N-1:0] c2_clamp_neg, c2_clamp_pos;

  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  int last_in [FRAMES];
  int last_out [FRAMES];
  map_t img [FRAMES];
  map_t ref_out [FRAMES];
  // Mechanism counters.
  int n_idle = 0, n_b2b = 0, n_c1_neg = 0, n_c1_pos = 0, n_c2_neg = 0, n_c2_pos = 0, n_pool_off = 0;
  int n_kind [4];

  lenet_dhm_top #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .IN_C(IN_C), .C1_N(C1_N), .C1_K(C1_K),
    .C2_N(C2_N), .C2_K(C2_K), .POOL(POOL)
  ) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Pooling windows whose maximum is not the top-left pixel.
  function automatic int pool_off(int C, int W, int H, map_t m);
    int cnt = 0;
    for (int c = 0; c < C; c++)
      for (int i = 0; i + POOL <= H; i += POOL)
        for (int j = 0; j + POOL <= W; j += POOL)
          for (int p = 0; p < POOL; p++)
            for (int q = 0; q < POOL; q++)
              if (m[(c*H + i + p)*W + j + q] > m[(c*H + i)*W + j]) cnt++;
    return cnt;
  endfunction

  task automatic check_mech(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else
      $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    map_t c1, p1, c2;
    foreach (in_data[c]) in_data[c] = '0;
    foreach (n_kind[k]) n_kind[k] = 0;
    for (int n = 0; n < C1_N; n++)
      for (int c = 0; c < IN_C; c++)
        for (int p = 0; p < C1_K * C1_K; p++) n_kind[int'(mult_kind(weight(0, n, c, p / C1_K, p % C1_K)))]++;
    for (int n = 0; n < C2_N; n++)
      for (int c = 0; c < C1_N; c++)
        for (int p = 0; p < C2_K * C2_K; p++) n_kind[int'(mult_kind(weight(1, n, c, p / C2_K, p % C2_K)))]++;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = new[IN_C * IMG_H * IMG_W];
      // Non-negative image pixels; frame 1 is brighter to reach saturation.
      foreach (img[f][i]) img[f][i] = (f == 1) ? int'($urandom_range(PIX_MAX, PIX_MAX / 2))
                                               : int'($urandom_range(PIX_MAX, 0));
      c1 = conv_ref(0, IN_C, C1_N, C1_K, IMG_W, IMG_H, img[f]);
      p1 = pool_ref(C1_N, POOL, POOL, C1_W, C1_H, c1);
      c2 = conv_ref(1, C1_N, C2_N, C2_K, P1_W, P1_H, p1);
      ref_out[f] = pool_ref(C2_N, POOL, POOL, C2_W, C2_H, c2);
      n_pool_off += pool_off(C1_N, C1_W, C1_H, c1) + pool_off(C2_N, C2_W, C2_H, c2);
      last_out[f] = -1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < IMG_H * IMG_W; i++) begin
        @(negedge clk);
        while (f == FRAMES - 1 && $urandom_range(3, 0) == 0) begin
          in_valid = 0;
          n_idle++;
          @(negedge clk);
        end
        if (i == 0 && f > 0 && in_valid) n_b2b++;
        in_valid = 1;
        for (int c = 0; c < IN_C; c++) in_data[c] = pixel_t'(img[f][c*IMG_H*IMG_W + i]);
      end
      last_in[f] = cyc;
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
    if (last_out[0] != last_in[0] + LAT) begin
      failures++;
      $display("FAIL: latency: last output at %0d, last pixel at %0d", last_out[0], last_in[0]);
    end
    checks++;
    if (last_out[1] - last_out[0] != IMG_W * IMG_H) begin
      failures++;
      $display("FAIL: throughput: frames finish %0d clocks apart", last_out[1] - last_out[0]);
    end
    check_mech("idle input cycles", n_idle);
    check_mech("back-to-back frames", n_b2b);
    check_mech("conv1 zero clamp", n_c1_neg);
    check_mech("conv1 saturation", n_c1_pos);
    check_mech("conv2 zero clamp", n_c2_neg);
    check_mech("conv2 saturation", n_c2_pos);
    check_mech("pool max off corner", n_pool_off);
    check_mech("multipliers removed (w=0)", n_kind[0]);
    check_mech("multipliers as wires (|w|=1)", n_kind[1]);
    check_mech("multipliers as shifts", n_kind[2]);
    check_mech("multipliers in logic", n_kind[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      n_c1_neg += $countones(c1_clamp_neg);
      n_c1_pos += $countones(c1_clamp_pos);
      n_c2_neg += $countones(c2_clamp_neg);
      n_c2_pos += $countones(c2_clamp_pos);
    end
    if (rst_n && out_valid) begin
      int f, k;
      f = n_out / NPIX;
      k = n_out % NPIX;
      if (f < FRAMES && k == NPIX - 1) last_out[f] = cyc;
      for (int n = 0; n < C2_N; n++) begin
        checks++;
        if (f >= FRAMES || int'(out_data[n]) != ref_out[f][n*NPIX + k]) begin
          failures++;
          $display("FAIL: frame %0d pixel %0d map %0d: %0d", f, k, n, out_data[n]);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
