// qnn_ref_pkg: bit-true reference model of the streaming QNN layers, for
// the testbenches. Independent of the RTL: it computes whole feature maps
// with plain nested loops over integers.
//
// Weights and thresholds are not stored but generated from a hash of
// (layer, output channel, column), so a testbench can load them into the
// design word by word and the model can recompute them when needed.
// Feature maps are flat int queues indexed ((m*N + y)*N + x)*C + c.
package qnn_ref_pkg;
  import qnn_pkg::*;

  function automatic int unsigned hsh(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // raw weight bits of matrix row co, column col of layer l
  function automatic int unsigned wbits(int l, layer_cfg_t c, int co, int col);
    return hsh(l + 1, co, col) & ((1 << c.W) - 1);
  endfunction

  // numeric value of those bits (bipolar for W = 1, two's complement else)
  function automatic int wval(layer_cfg_t c, int unsigned b);
    if (c.W == 1) return b[0] ? 1 : -1;
    return (b >= (1 << (c.W - 1))) ? int'(b) - (1 << c.W) : int'(b);
  endfunction

  function automatic int isqrt(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // threshold j of output channel co: spread around 0 with the expected
  // size of a dot product, so that all output levels occur
  function automatic int thr(int l, layer_cfg_t c, int co, int j);
    int nt, sd, wm, am;
    nt = (1 << c.AO) - 1;
    wm = (c.W == 1) ? 1 : (1 << (c.W - 1)) / 2;
    am = (1 << c.A) / 2;
    sd = isqrt(int'(cfg_mw(c))) * wm * am;
    if (sd < 2) sd = 2;
    return (j - nt / 2) * sd / 2 + int'(hsh(l + 77, co, j) % 3) - 1;
  endfunction

  // one layer: convolution, thresholding (or raw), optional max pooling
  function automatic void layer(int l, layer_cfg_t c, int m_cnt, ref int in_map[$],
                                ref int out_map[$]);
    int n, ch, k, st, pd, co_n, od, pod, pk, ps, pp, acc, cnt, v, iy, ix, best, idx;
    int conv[$];
    int mw;
    byte wv[];
    n = int'(c.N); ch = int'(c.C); k = int'(c.K); st = int'(c.S); pd = int'(c.PAD);
    co_n = int'(c.CO); pk = int'(c.POOL_K); ps = int'(c.POOL_S); pp = int'(c.POOL_PAD);
    od = (n + 2 * pd - k) / st + 1;
    // weight values, computed once per layer
    mw = k * k * ch;
    wv = new[co_n * mw];
    for (int co = 0; co < co_n; co++)
      for (int col = 0; col < mw; col++) wv[co * mw + col] = byte'(wval(c, wbits(l, c, co, col)));
    conv = {};
    for (int m = 0; m < m_cnt; m++)
      for (int oy = 0; oy < od; oy++)
        for (int ox = 0; ox < od; ox++)
          for (int co = 0; co < co_n; co++) begin
            acc = 0;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                iy = oy * st - pd + ky;
                ix = ox * st - pd + kx;
                if (iy >= 0 && iy < n && ix >= 0 && ix < n)
                  for (int ci = 0; ci < ch; ci++) begin
                    idx = ((m * n + iy) * n + ix) * ch + ci;
                    v = in_map[idx];
                    acc += int'(wv[co * mw + (ky * k + kx) * ch + ci]) * v;
                  end
              end
            if (c.THRESH != 0) begin
              cnt = 0;
              for (int j = 0; j < (1 << c.AO) - 1; j++) if (acc >= thr(l, c, co, j)) cnt++;
              v = cnt;
            end else v = acc;
            conv.push_back(v);
          end
    if (pk == 0) begin
      out_map = conv;
      return;
    end
    pod = (od + 2 * pp - pk) / ps + 1;
    out_map = {};
    for (int m = 0; m < m_cnt; m++)
      for (int py = 0; py < pod; py++)
        for (int px = 0; px < pod; px++)
          for (int co = 0; co < co_n; co++) begin
            best = 0;
            for (int ky = 0; ky < pk; ky++)
              for (int kx = 0; kx < pk; kx++) begin
                iy = py * ps - pp + ky;
                ix = px * ps - pp + kx;
                if (iy >= 0 && iy < od && ix >= 0 && ix < od) begin
                  idx = ((m * od + iy) * od + ix) * co_n + co;
                  v = conv[idx];
                  if (v > best) best = v;
                end
              end
            out_map.push_back(best);
          end
  endfunction

  // packed weight word of PE pe, word index nf*SF + sf
  function automatic logic [16383:0] wword(int l, layer_cfg_t c, int pe, int nf, int sf);
    logic [16383:0] w = '0;
    for (int i = 0; i < int'(c.SIMD); i++)
      w[i*c.W +: 32] = wbits(l, c, nf * int'(c.PE) + pe, sf * int'(c.SIMD) + i);
    return w;
  endfunction

  // packed threshold word of PE pe, neuron fold nf
  function automatic logic [16383:0] tword(int l, layer_cfg_t c, int pe, int nf);
    logic [16383:0] t = '0;
    int unsigned acc;
    acc = cfg_acc(c);
    for (int j = 0; j < (1 << c.AO) - 1; j++) begin
      logic [31:0] v;
      v = 32'(thr(l, c, nf * int'(c.PE) + pe, j));
      for (int b = 0; b < int'(acc); b++) t[j*acc + b] = v[b < 32 ? b : 31];
    end
    return t;
  endfunction

endpackage
