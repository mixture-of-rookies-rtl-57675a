// tb_mor_pkg: testbench helpers for the Mixture-of-Rookies accelerator.
//
// Reference arithmetic written independently of the RTL (plain integer
// math), and encoders that turn a neuron (weights plus header fields) into
// the words of a proxy or non-proxy table row:
//   proxy:      w0 = {cluster size, idx}, w1 = {bn_bias, bn_scale},
//               then 8-bit weights eight per word
//   non-proxy:  w0 = {c, idx}, w1 = {b, m, bn_bias, bn_scale},
//               then one sign word per 64 weights, then the 7 low bits of the
//               weights packed seven words per 64 weights
package tb_mor_pkg;

  typedef byte wvec_t[];

  function automatic int groups(input int k);
    return (k + 63) / 64;
  endfunction

  function automatic void proxy_row(input int idx, input int cs, input int bn_scale,
                                    input int bn_bias, input wvec_t w, input int k,
                                    ref logic [63:0] words[$]);
    logic [63:0] x;
    words.delete();
    words.push_back({40'd0, 8'(cs), 16'(idx)});
    words.push_back({32'd0, 16'(bn_bias), 16'(bn_scale)});
    for (int g = 0; g < 8 * groups(k); g++) begin
      x = '0;
      for (int b = 0; b < 8; b++)
        if (8 * g + b < k) x[8*b +: 8] = w[8*g+b];
      words.push_back(x);
    end
  endfunction

  function automatic void nonproxy_row(input int idx, input int c, input int bn_scale,
                                       input int bn_bias, input int m, input int b,
                                       input wvec_t w, input int k,
                                       ref logic [63:0] words[$]);
    logic [63:0]  x;
    logic [447:0] bits;
    words.delete();
    words.push_back({40'd0, 8'(c), 16'(idx)});
    words.push_back({16'(b), 16'(m), 16'(bn_bias), 16'(bn_scale)});
    for (int j = 0; j < groups(k); j++) begin
      x = '0;
      for (int i = 0; i < 64; i++)
        if (64 * j + i < k) x[i] = w[64*j+i][7];
      words.push_back(x);
    end
    for (int j = 0; j < groups(k); j++) begin
      bits = '0;
      for (int i = 0; i < 64; i++)
        if (64 * j + i < k) bits[7*i +: 7] = w[64*j+i][6:0];
      for (int q = 0; q < 7; q++) words.push_back(bits[64*q +: 64]);
    end
  endfunction

  function automatic longint ref_dot(input wvec_t w, input wvec_t x, input int k);
    longint s = 0;
    for (int i = 0; i < k; i++) s += longint'(w[i]) * longint'(x[i]);
    return s;
  endfunction

  // 1-bit dot product: +1 where the signs agree, -1 where they differ
  function automatic longint ref_bin_dot(input wvec_t w, input wvec_t x, input int k);
    longint s = 0;
    for (int i = 0; i < k; i++) s += ((w[i] < 0) == (x[i] < 0)) ? 1 : -1;
    return s;
  endfunction

  function automatic longint floor_div256(input longint v);
    // floor(v / 256) for either sign
    if (v >= 0) return v / 256;
    return -((-v + 255) / 256);
  endfunction

  function automatic longint ref_estimate(input longint pbin, input int m, input int b);
    return floor_div256(pbin * m) + b;
  endfunction

  function automatic longint ref_relu_in(input longint dot, input int bn_scale, input int bn_bias,
                                         input int res, input bit res_en, input int sh);
    longint y;
    y = floor_div256(dot * bn_scale) + bn_bias;
    if (res_en) y += longint'(res) * (longint'(1) << sh);
    return y;
  endfunction

  function automatic int ref_quant(input longint y, input int sh, input bit relu);
    longint s;
    s = (y >= 0) ? (y >> sh) : -((-y + (longint'(1) << sh) - 1) >> sh);
    if (relu && s < 0) return 0;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

endpackage
