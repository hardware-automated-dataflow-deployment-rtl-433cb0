// const_mult: multiplication of a pixel by a kernel weight that is fixed when the
// design is elaborated.
//
// Because trained weights are constants, each multiplier is specialised to its
// weight instead of being a general two-operand multiplier:
//   weight 0        -> no logic, the product is 0 (the term disappears)
//   weight +1 / -1  -> a wire (with a negation for -1)
//   weight +-2^k    -> a shift by k (with a negation for a negative weight)
//   other weights   -> a multiplication by a constant, built from logic
// The four cases follow the paper; selecting them explicitly with a generate
// branch, rather than leaving it to the synthesis tool, is this design's choice
// and makes the category visible in the hierarchy (KIND).
//
// Purely combinational. x and the product are signed two's complement; the
// product has the full 2*IN_W width, so no case can overflow.
module const_mult
  import cnn_pkg::*;
#(
  parameter int WEIGHT = 3,
  parameter int IN_W   = BITWIDTH,
  parameter int OUT_W  = 2 * BITWIDTH
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] p
);

  localparam mult_kind_e KIND  = mult_kind(WEIGHT);
  localparam int         SHIFT = log2_int(abs_int(WEIGHT));

  logic signed [OUT_W-1:0] xe;
  assign xe = OUT_W'(x);    // sign extension

  if (KIND == MULT_ZERO) begin : g_zero
    assign p = '0;
  end else if (KIND == MULT_WIRE) begin : g_wire
    if (WEIGHT > 0) begin : g_pos
      assign p = xe;
    end else begin : g_neg
      assign p = -xe;
    end
  end else if (KIND == MULT_SHIFT) begin : g_shift
    if (WEIGHT > 0) begin : g_pos
      assign p = xe <<< SHIFT;
    end else begin : g_neg
      assign p = -(xe <<< SHIFT);
    end
  end else begin : g_logic
    localparam logic signed [OUT_W-1:0] WC = OUT_W'(WEIGHT);
    assign p = xe * WC;
  end

endmodule
