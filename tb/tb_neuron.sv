// tb_neuron: random window sets for C=3 channels of 3x3 go through one neuron;
// each output must equal act(bias + sum over channels of the convolutions) three
// clocks after its input, one result per clock. Inputs are fed every cycle.
module tb_neuron;
  import cnn_pkg::*;
  import tb_cnn_ref_pkg::*;
  localparam int C = 3, K = 3, LAYER = 1, NI = 4, LAT = 3, NT = 400;

  logic   clk = 0, rst_n = 0, in_valid = 0;
  pixel_t win [C][K][K];
  logic   out_valid, clamped_neg, clamped_pos;
  pixel_t dout;
  int checks = 0, failures = 0, cyc = 0, n_out = 0, n_neg = 0, n_pos = 0;
  int exp_v [NT];
  int exp_t [NT];

  neuron #(.LAYER(LAYER), .N_IDX(NI), .C(C), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    longint s;
    foreach (win[c, p, q]) win[c][p][q] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      in_valid = 1;
      s = longint'(bias(LAYER, NI)) << FRAC;
      for (int c = 0; c < C; c++)
        for (int p = 0; p < K; p++)
          for (int q = 0; q < K; q++) begin
            win[c][p][q] = pixel_t'(rand_pix());
            s += longint'(win[c][p][q]) * weight(LAYER, NI, c, p, q);
          end
      exp_v[t] = act_ref(s);
      exp_t[t] = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (n_out != NT || n_neg == 0 || n_pos == 0) begin
      failures++;
      $display("FAIL: %0d outputs, %0d zero-clamped, %0d saturated", n_out, n_neg, n_pos);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      if (n_out < NT && int'(dout) != exp_v[n_out]) begin
        failures++;
        $display("FAIL: output %0d = %0d expected %0d", n_out, dout, exp_v[n_out]);
      end
      if (n_out >= NT || cyc != exp_t[n_out] + LAT) begin
        failures++;
        $display("FAIL: output %0d at cycle %0d", n_out, cyc);
      end
      n_out++;
      n_neg += clamped_neg;
      n_pos += clamped_pos;
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
