// cnn_ref_pkg: plain reference model of the Student 2 network for the
// testbenches. Feature maps are flat int arrays in channel-last raster
// order, index (r*W + c)*C + ch. The arithmetic follows the number format
// of the design (16-bit values, per-layer fraction bits, 10 by default;
// exact sums with the bias aligned to the product format, floored and
// saturated back to 16 bits) but is written as direct loops over whole
// frames, independent of the streaming hardware.
package cnn_ref_pkg;

  // drop sh fraction bits (floor) and saturate to 16 bits
  function automatic int sat16(longint v, int sh = 10);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  // params: global parameter array, wofs/bofs: offsets of weights/biases,
  // fi/fw/fo: fraction bits of input, weights and output
  function automatic void conv(const ref int x[], input int h, input int w, input int ci,
                               input int co, const ref int params[], input int wofs,
                               input int bofs, ref int y[], input int fi = 10,
                               input int fw = 10, input int fo = 10);
    int oh, ow;
    oh = h - 2; ow = w - 2;
    y = new[oh * ow * co];
    for (int r = 0; r < oh; r++)
      for (int c = 0; c < ow; c++)
        for (int o = 0; o < co; o++) begin
          longint a;
          a = longint'(params[bofs + o]) <<< fi;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int i = 0; i < ci; i++)
                a += longint'(x[((r + ky) * w + c + kx) * ci + i]) *
                     params[wofs + ((ky * 3 + kx) * ci + i) * co + o];
          y[(r * ow + c) * co + o] = sat16(a, fi + fw - fo);
        end
  endfunction

  function automatic void relu(ref int y[]);
    foreach (y[i]) if (y[i] < 0) y[i] = 0;
  endfunction

  function automatic void pool(const ref int x[], input int h, input int w, input int ch,
                               ref int y[]);
    int oh, ow;
    oh = h / 2; ow = w / 2;
    y = new[oh * ow * ch];
    for (int r = 0; r < oh; r++)
      for (int c = 0; c < ow; c++)
        for (int i = 0; i < ch; i++) begin
          int m;
          m = x[((2 * r) * w + 2 * c) * ch + i];
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (x[((2 * r + dy) * w + 2 * c + dx) * ch + i] > m)
                m = x[((2 * r + dy) * w + 2 * c + dx) * ch + i];
          y[(r * ow + c) * ch + i] = m;
        end
  endfunction

  // whole network; img: pixel values 0..255; returns logits
  function automatic void network(const ref int img[], input int side, input int c0,
                                  input int c1, const ref int params[],
                                  output int z0, output int z1);
    network_q(img, side, c0, c1, params, '{10, 10, 10, 10, 10, 10, 10}, z0, z1);
  endfunction

  // the same with per-layer fraction bits
  // fr = {pixels, conv_0 weights, conv_0 output, conv_1 weights,
  //       conv_1 output, dense_0 weights, logits}
  function automatic void network_q(const ref int img[], input int side, input int c0,
                                    input int c1, const ref int params[], input int fr[7],
                                    output int z0, output int z1);
    int x[], a[], b[];
    int s0, q0, s1, q1, nf, a1, ad;
    longint acc [2];
    x = new[side * side];
    foreach (img[i]) x[i] = img[i] << (fr[0] - 8);     // pixel / 256
    s0 = side - 2; q0 = s0 / 2; s1 = q0 - 2; q1 = s1 / 2; nf = q1 * q1 * c1;
    a1 = 9 * c0 + c0;
    ad = a1 + 9 * c0 * c1 + c1;
    conv(x, side, side, 1, c0, params, 0, 9 * c0, a, fr[0], fr[1], fr[2]);
    relu(a);
    pool(a, s0, s0, c0, b);
    conv(b, q0, q0, c0, c1, params, a1, a1 + 9 * c0 * c1, a, fr[2], fr[3], fr[4]);
    relu(a);
    pool(a, s1, s1, c1, b);
    for (int o = 0; o < 2; o++) begin
      acc[o] = longint'(params[ad + nf * 2 + o]) <<< fr[4];
      for (int i = 0; i < nf; i++) acc[o] += longint'(b[i]) * params[ad + i * 2 + o];
    end
    z0 = sat16(acc[0], fr[4] + fr[5] - fr[6]);
    z1 = sat16(acc[1], fr[4] + fr[5] - fr[6]);
  endfunction

  // confidence of the winning class with 16 fraction bits (PLAN sigmoid);
  // lf: fraction bits of the logits, the difference floored to 16
  function automatic int confidence(int z0, int z1, int lf = 10);
    real d, p;
    d = $floor((z1 > z0 ? z1 - z0 : z0 - z1) * 65536.0 / (2.0 ** lf)) / 65536.0;
    if (d >= 5.0)        p = 1.0;
    else if (d >= 2.375) p = d / 32.0 + 0.84375;
    else if (d >= 1.0)   p = d / 8.0 + 0.625;
    else                 p = d / 4.0 + 0.5;
    return int'($floor(p * 65536.0));
  endfunction

  // two-bit code: 01 class 0, 10 class 1, 00 rejected
  function automatic int code(int z0, int z1, int tau, int lf = 10);
    if (confidence(z0, z1, lf) < tau) return 0;
    return (z1 > z0) ? 2 : 1;
  endfunction

endpackage
