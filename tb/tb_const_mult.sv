// tb_const_mult: exhaustively checks constant multipliers of every kind (zero,
// +-1, powers of two, general constants) against integer multiplication for all
// 5-bit signed inputs, and that each weight selects the expected kind.
module tb_const_mult;
  import cnn_pkg::*;
  localparam int NW = 12;
  localparam int WS [NW] = '{0, 1, -1, 2, -4, 8, -16, 3, -7, 13, 15, -11};

  logic signed [BITWIDTH-1:0]   x;
  logic signed [2*BITWIDTH-1:0] p [NW];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NW; i++) begin : g_m
    const_mult #(.WEIGHT(WS[i])) u_m (.x(x), .p(p[i]));
  end

  initial begin
    for (int v = -(2**(BITWIDTH-1)); v < 2**(BITWIDTH-1); v++) begin
      x = BITWIDTH'(v);
      #1;
      for (int i = 0; i < NW; i++) begin
        checks++;
        if (int'(p[i]) != v * WS[i]) begin
          failures++;
          $display("FAIL: %0d * %0d gave %0d", v, WS[i], p[i]);
        end
      end
    end
    // Kind selection (0, wire, shift, logic).
    checks++;
    if (mult_kind(0) != MULT_ZERO || mult_kind(-1) != MULT_WIRE || mult_kind(-16) != MULT_SHIFT ||
        mult_kind(8) != MULT_SHIFT || mult_kind(6) != MULT_LOGIC) begin
      failures++;
      $display("FAIL: multiplier kind selection");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
