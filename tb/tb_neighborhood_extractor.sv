// tb_neighborhood_extractor: streams three random frames (with random idle
// cycles, frames back to back) through a 3x3 extractor on an 8x6 image. Every
// window flagged valid must hold the right K x K pixels, carry the position of
// its newest pixel and come exactly one clock after that pixel; the number of
// valid windows per frame must be (W-K+1)*(H-K+1).
module tb_neighborhood_extractor;
  import cnn_pkg::*;
  localparam int K = 3, W = 8, H = 6, FRAMES = 3;

  logic   clk = 0, rst_n = 0, in_valid = 0;
  pixel_t in_data = '0;
  pixel_t win [K][K];
  logic   win_valid;
  logic [$clog2(W)-1:0] win_col;
  logic [$clog2(H)-1:0] win_row;

  int checks = 0, failures = 0, cyc = 0, n_win = 0, n_idle = 0;
  int img [FRAMES][H][W];
  typedef struct { int f; int r; int c; int t; } exp_t;
  exp_t q[$];

  neighborhood_extractor #(.K(K), .IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Driver.
  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) img[f][r][c] = tb_cnn_ref_pkg::rand_pix();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while (f > 0 && $urandom_range(3, 0) == 0) begin
            in_valid = 0;
            n_idle++;
            @(negedge clk);
          end
          in_valid = 1;
          in_data  = pixel_t'(img[f][r][c]);
          if (r >= K - 1 && c >= K - 1) q.push_back('{f, r, c, cyc});
        end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_win != FRAMES * (W-K+1) * (H-K+1)) begin
      failures++;
      $display("FAIL: %0d windows, %0d left", n_win, q.size());
    end
    $display("idle cycles: %0d", n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor.
  always @(posedge clk) begin
    if (rst_n && win_valid) begin
      exp_t e;
      n_win++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected window");
      end else begin
        e = q.pop_front();
        if (cyc != e.t + 1 || int'(win_col) != e.c || int'(win_row) != e.r) begin
          failures++;
          $display("FAIL: window timing/position t=%0d exp %0d (%0d,%0d)", cyc, e.t + 1, e.r, e.c);
        end
        for (int p = 0; p < K; p++)
          for (int qq = 0; qq < K; qq++) begin
            checks++;
            if (int'(win[p][qq]) != img[e.f][e.r-K+1+p][e.c-K+1+qq]) begin
              failures++;
              $display("FAIL: frame %0d (%0d,%0d) win[%0d][%0d]", e.f, e.r, e.c, p, qq);
            end
          end
      end
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
