// cnn_pkg: types, constants and elaboration-time parameter tables shared by the
// direct-hardware-mapped CNN.
//
// Every pixel travelling between layers is a signed fixed-point word of BITWIDTH
// bits with FRAC fractional bits (Q1.4 for the 5-bit default). Kernel weights and
// biases use the same format. The 5-bit width is the one the resource figures of
// the LeNet5, FaceDetect and CarType accelerators were reported for; the position
// of the binary point is this design's choice.
//
// In a generated accelerator the weights are trained values written into a
// configuration package. No trained values are available here, so weight() and
// bias() compute a fixed pseudo-random set from the coordinates of each
// coefficient: a 32-bit multiplicative hash h of (layer, n, c, p, q), then
//     weight = 0 if h mod 4 = 0, else ((h >> 8) mod 32) - 16
// which gives about 25 % zeros plus the full signed 5-bit range, so that every
// kind of tailored multiplier (removed, wire, shift, logic multiplier) occurs.
//     bias = (hash(layer, n, 97, 0, 0) mod 16) - 8
// Swap these two functions for tables of trained values to deploy a real network.
package cnn_pkg;

  parameter int BITWIDTH = 5;              // stream and coefficient width
  parameter int FRAC     = BITWIDTH - 1;   // fractional bits of pixels and weights

  typedef logic signed [BITWIDTH-1:0] pixel_t;

  localparam int PIX_MAX = (1 <<< (BITWIDTH - 1)) - 1;  // largest positive code

  // 32-bit mixing hash of five small coordinates.
  function automatic int unsigned coef_hash(int l, int n, int c, int p, int q);
    int unsigned h;
    h = 32'h9E37_79B9;
    h = (h ^ int'(l)) * 32'h0100_0193;
    h = (h ^ int'(n)) * 32'h0100_0193;
    h = (h ^ int'(c)) * 32'h0100_0193;
    h = (h ^ int'(p)) * 32'h0100_0193;
    h = (h ^ int'(q)) * 32'h0100_0193;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  // Kernel coefficient w[layer][n][c][p][q] as a signed integer code.
  function automatic int weight(int l, int n, int c, int p, int q);
    int unsigned h;
    h = coef_hash(l, n, c, p, q);
    if ((h & 3) == 0) return 0;
    return int'((h >> 8) % 32) - 16;
  endfunction

  // Bias b[layer][n] as a signed integer code in pixel format.
  function automatic int bias(int l, int n);
    return int'(coef_hash(l, n, 97, 0, 0) % 16) - 8;
  endfunction

  // Multiplier category of a weight code, as the constant multiplier builds it.
  typedef enum logic [1:0] {
    MULT_ZERO  = 2'd0,   // operand removed
    MULT_WIRE  = 2'd1,   // +1 or -1: a wire (and a negation)
    MULT_SHIFT = 2'd2,   // +-2^k: a shift
    MULT_LOGIC = 2'd3    // anything else: a multiplier built from logic
  } mult_kind_e;

  function automatic int abs_int(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic bit is_pow2(int v);
    return (v > 0) && ((v & (v - 1)) == 0);
  endfunction

  function automatic int log2_int(int v);
    int r;
    r = 0;
    while ((1 <<< (r + 1)) <= v) r++;
    return r;
  endfunction

  function automatic mult_kind_e mult_kind(int w);
    if (w == 0) return MULT_ZERO;
    if (abs_int(w) == 1) return MULT_WIRE;
    if (is_pow2(abs_int(w))) return MULT_SHIFT;
    return MULT_LOGIC;
  endfunction

endpackage
