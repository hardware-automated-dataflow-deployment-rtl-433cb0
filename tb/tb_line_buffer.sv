// tb_line_buffer: checks that the line buffer returns, on every enabled cycle,
// the pixel written exactly DEPTH enabled cycles earlier, with random idle
// cycles in between (which must not advance it).
module tb_line_buffer;
  localparam int DEPTH = 6;
  localparam int WIDTH = 5;

  logic clk = 0, rst_n = 0, en = 0;
  logic [WIDTH-1:0] din = '0, dout;
  int checks = 0, failures = 0, cyc = 0;
  int hist[$];

  line_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en  = ($urandom_range(3, 0) != 0);
      din = WIDTH'($urandom);
      @(posedge clk);
      if (en) begin
        if (hist.size() >= DEPTH) begin
          checks++;
          if (dout !== hist[hist.size() - DEPTH]) begin
            failures++;
            $display("FAIL: dout=%0d expected %0d", dout, hist[hist.size() - DEPTH]);
          end
        end
        hist.push_back(int'(din));
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
