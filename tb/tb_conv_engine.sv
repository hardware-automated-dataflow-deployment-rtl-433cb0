// tb_conv_engine: random 3x3 windows go through one convolution engine; the sum
// must equal the direct sum of products with the kernel w[1][2][1] one clock
// later. The kernel is checked to contain several kinds of multiplier.
module tb_conv_engine;
  import cnn_pkg::*;
  localparam int K = 3, LAYER = 1, NI = 2, CI = 1;
  localparam int OUT_W = 2 * BITWIDTH + $clog2(K * K);

  logic   clk = 0, rst_n = 0, in_valid = 0;
  pixel_t win [K][K];
  logic   out_valid;
  logic signed [OUT_W-1:0] sum;
  int checks = 0, failures = 0, e, kinds;

  conv_engine #(.LAYER(LAYER), .N_IDX(NI), .C_IDX(CI), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    kinds = 0;
    for (int p = 0; p < K; p++)
      for (int q = 0; q < K; q++) kinds |= 1 << int'(mult_kind(weight(LAYER, NI, CI, p, q)));
    foreach (win[p, q]) win[p][q] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(1, 0);
      e = 0;
      for (int p = 0; p < K; p++)
        for (int q = 0; q < K; q++) begin
          win[p][q] = pixel_t'(tb_cnn_ref_pkg::rand_pix());
          if (t == 0) win[p][q] = pixel_t'(-16);
          e += int'(win[p][q]) * weight(LAYER, NI, CI, p, q);
        end
      @(negedge clk);
      checks += 2;
      if (int'(sum) != e) begin
        failures++;
        $display("FAIL: sum=%0d expected %0d", sum, e);
      end
      if (out_valid != in_valid) begin
        failures++;
        $display("FAIL: out_valid");
      end
    end
    checks++;
    if ($countones(kinds) < 2) begin
      failures++;
      $display("FAIL: kernel uses fewer than two multiplier kinds (%b)", kinds);
    end
    $display("multiplier kinds used: %b", kinds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
