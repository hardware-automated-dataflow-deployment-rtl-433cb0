// activation: the non-linear function applied to each neuron's sum, which also
// brings the sum back to the stream's pixel format.
//
// The sum arrives with 2*FRAC fractional bits. It is shifted right by FRAC
// (arithmetic shift, i.e. rounding towards minus infinity), then the rectifier
// max(0, s) is applied and the result is clipped to the largest positive pixel
// code. Output is registered: one clock of latency, one result per clock.
// The paper names an activation block but not its function; the rectifier,
// the truncating rescale and the saturation are this design's choices.
module activation
  import cnn_pkg::*;
#(
  parameter int IN_W = 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] din,
  output logic                   out_valid,
  output pixel_t                 dout,
  output logic                   clamped_neg,   // result was forced to 0
  output logic                   clamped_pos    // result was clipped to PIX_MAX
);

  logic signed [IN_W-1:0] scaled;
  logic neg, sat;

  assign scaled = din >>> FRAC;
  assign neg    = scaled < 0;
  assign sat    = scaled > IN_W'(PIX_MAX);

  always_ff @(posedge clk) begin
    if (neg)      dout <= '0;
    else if (sat) dout <= pixel_t'(PIX_MAX);
    else          dout <= pixel_t'(scaled);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      clamped_neg <= 1'b0;
      clamped_pos <= 1'b0;
    end else begin
      out_valid   <= in_valid;
      clamped_neg <= in_valid && neg;
      clamped_pos <= in_valid && sat;
    end
  end

endmodule
