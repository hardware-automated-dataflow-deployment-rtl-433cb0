// line_buffer: fixed-length pixel delay used between the register rows of a
// neighbourhood extractor.
//
// It holds DEPTH pixels in a small circular memory addressed by one pointer.
// Each cycle with en high, the oldest stored pixel appears on dout (read without
// a clock, as a LUT-based memory does) and din is written into the same slot, so
// dout is the pixel that entered DEPTH enabled cycles earlier. Cycles with en low
// leave the contents untouched, which lets the stream pause without losing its
// row alignment. In the extractor DEPTH is the image width minus the kernel size,
// so that K registers plus one buffer span exactly one image row.
//
// The memory itself is not reset: its contents are only used once a whole row
// has been written. The pointer resets to 0 (synchronous, active low).
module line_buffer #(
  parameter int DEPTH = 23,
  parameter int WIDTH = cnn_pkg::BITWIDTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (en) mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      ptr <= '0;
    else if (en)
      ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

  initial assert (DEPTH >= 1) else $error("line_buffer: DEPTH must be at least 1");

endmodule
