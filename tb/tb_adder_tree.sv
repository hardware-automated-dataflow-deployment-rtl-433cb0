// tb_adder_tree: random signed operands, including extremes, are summed; the
// registered sum and out_valid must appear exactly one clock later.
module tb_adder_tree;
  localparam int N_IN = 7, IN_W = 6, OUT_W = IN_W + 3;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [IN_W-1:0]  din [N_IN];
  logic                    out_valid;
  logic signed [OUT_W-1:0] sum;
  int checks = 0, failures = 0;
  int exp_sum;
  logic exp_valid;

  adder_tree #(.N_IN(N_IN), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    foreach (din[i]) din[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(1, 0);
      exp_sum = 0;
      for (int i = 0; i < N_IN; i++) begin
        if (t < 4) din[i] = (t[0]) ? IN_W'(-(2**(IN_W-1))) : IN_W'(2**(IN_W-1) - 1);
        else       din[i] = IN_W'($urandom);
        exp_sum += int'(din[i]);
      end
      exp_valid = in_valid;
      @(negedge clk);
      checks += 2;
      if (int'(sum) != exp_sum) begin
        failures++;
        $display("FAIL: sum=%0d expected %0d", sum, exp_sum);
      end
      if (out_valid != exp_valid) begin
        failures++;
        $display("FAIL: out_valid=%0b expected %0b", out_valid, exp_valid);
      end
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
