// tb_activation: random and boundary sums go through the activation; the output
// must equal the rectified, rescaled and clipped value one clock later, with the
// clipping flags set exactly when clipping happened.
module tb_activation;
  import cnn_pkg::*;
  import tb_cnn_ref_pkg::*;
  localparam int IN_W = 12;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [IN_W-1:0] din = '0;
  logic   out_valid, clamped_neg, clamped_pos;
  pixel_t dout;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;
  int e, raw;

  activation #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      case (t)
        0: din = 0;  1: din = 15;  2: din = 16;  3: din = -1;
        4: din = 255; 5: din = 256; 6: din = -2048; 7: din = 2047;
        default: din = IN_W'($urandom);
      endcase
      raw = int'(din);
      e = act_ref(longint'(raw));
      @(negedge clk);
      checks += 3;
      if (int'(dout) != e) begin
        failures++;
        $display("FAIL: act(%0d)=%0d expected %0d", raw, dout, e);
      end
      if (clamped_neg != (raw < 0)) begin
        failures++;
        $display("FAIL: clamped_neg for %0d", raw);
      end
      if (clamped_pos != ((raw >>> 4) > PIX_MAX)) begin
        failures++;
        $display("FAIL: clamped_pos for %0d", raw);
      end
      if (!out_valid) begin
        failures++;
        $display("FAIL: out_valid low");
      end
      n_neg += clamped_neg;
      n_pos += clamped_pos;
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) begin
      failures++;
      $display("FAIL: clipping never exercised");
    end
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
