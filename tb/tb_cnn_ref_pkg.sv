// tb_cnn_ref_pkg: plain software reference of the CNN layers, used by the
// testbenches to compute expected outputs independently of the RTL structure.
//
// Feature maps are flat int arrays indexed [(c*H + row)*W + col]. The reference
// uses the same coefficients as the hardware (cnn_pkg::weight/bias) but computes
// every output directly from the layer equations with nested loops: a 'valid'
// convolution, a bias in pixel format, the rectifier with rescaling by 2^FRAC and
// clipping, and max pooling.
package tb_cnn_ref_pkg;
  import cnn_pkg::*;

  typedef int map_t[];

  // Rescale (floor division by 2^FRAC), rectify and clip.
  function automatic int act_ref(longint s);
    longint d, q;
    d = longint'(1) << FRAC;
    q = s / d;
    if ((s % d != 0) && (s < 0)) q = q - 1;   // floor for negative sums
    if (q < 0) return 0;
    if (q > longint'(PIX_MAX)) return PIX_MAX;
    return int'(q);
  endfunction

  function automatic map_t conv_ref(int layer, int C, int N, int K, int W, int H, map_t in);
    int OW, OH;
    map_t out;
    longint s;
    OW = W - K + 1;
    OH = H - K + 1;
    out = new[N * OH * OW];
    for (int n = 0; n < N; n++)
      for (int i = 0; i < OH; i++)
        for (int j = 0; j < OW; j++) begin
          s = longint'(bias(layer, n)) * (longint'(1) << FRAC);
          for (int c = 0; c < C; c++)
            for (int p = 0; p < K; p++)
              for (int q = 0; q < K; q++)
                s += longint'(in[(c*H + i + p)*W + j + q]) * weight(layer, n, c, p, q);
          out[(n*OH + i)*OW + j] = act_ref(s);
        end
    return out;
  endfunction

  function automatic map_t pool_ref(int C, int P, int S, int W, int H, map_t in);
    int OW, OH, m;
    map_t out;
    OW = (W - P) / S + 1;
    OH = (H - P) / S + 1;
    out = new[C * OH * OW];
    for (int c = 0; c < C; c++)
      for (int i = 0; i < OH; i++)
        for (int j = 0; j < OW; j++) begin
          m = in[(c*H + i*S)*W + j*S];
          for (int p = 0; p < P; p++)
            for (int q = 0; q < P; q++)
              if (in[(c*H + i*S + p)*W + j*S + q] > m) m = in[(c*H + i*S + p)*W + j*S + q];
          out[(c*OH + i)*OW + j] = m;
        end
    return out;
  endfunction

  // Signed value of a random BITWIDTH-bit code.
  function automatic int rand_pix();
    return int'($urandom_range(2**BITWIDTH - 1, 0)) - 2**(BITWIDTH - 1);
  endfunction

endpackage
