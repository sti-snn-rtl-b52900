// snn_ref_pkg: reference model of the spiking layers, used by the testbenches.
// Feature maps are flat bit arrays indexed (row*W + col)*C + channel; weights of a
// standard convolution are flat int arrays indexed ((co*CI + ci)*K + kh)*K + kw.
// All arithmetic is plain integer arithmetic, independent of the RTL.
package snn_ref_pkg;

  typedef bit bmap_t [];
  typedef int imap_t [];

  // 2x2 stride-2 OR pooling (floor for odd sizes)
  function automatic bmap_t pool2(input bmap_t m, input int c, input int h, input int w);
    bmap_t o = new[(h / 2) * (w / 2) * c];
    for (int r = 0; r < h / 2; r++)
      for (int x = 0; x < w / 2; x++)
        for (int ch = 0; ch < c; ch++)
          o[(r * (w / 2) + x) * c + ch] = m[((2*r) * w + 2*x) * c + ch] | m[((2*r) * w + 2*x+1) * c + ch] |
                                          m[((2*r+1) * w + 2*x) * c + ch] | m[((2*r+1) * w + 2*x+1) * c + ch];
    return o;
  endfunction

  // membrane potentials of a standard KxK convolution with zero padding, stride 1
  function automatic imap_t conv_pot(input bmap_t m, input int ci, input int h, input int w,
                                     input imap_t wt, input int co, input int k, input int pad);
    int ho = h + 2 * pad - k + 1, wo = w + 2 * pad - k + 1;
    imap_t v = new[ho * wo * co];
    for (int r = 0; r < ho; r++)
      for (int x = 0; x < wo; x++)
        for (int o = 0; o < co; o++) begin
          int s;
          s = 0;
          for (int kh = 0; kh < k; kh++)
            for (int kw = 0; kw < k; kw++) begin
              int rr, xx;
              rr = r + kh - pad; xx = x + kw - pad;
              if (rr >= 0 && rr < h && xx >= 0 && xx < w)
                for (int i = 0; i < ci; i++)
                  if (m[(rr * w + xx) * ci + i]) s += wt[((o * ci + i) * k + kh) * k + kw];
            end
          v[(r * wo + x) * co + o] = s;
        end
    return v;
  endfunction

  // membrane potentials of a depthwise KxK convolution (channel c uses only input
  // channel c), zero padding, stride 1; weights indexed (c*K + kh)*K + kw
  function automatic imap_t dw_pot(input bmap_t m, input int c, input int h, input int w,
                                   input imap_t wt, input int k, input int pad);
    int ho = h + 2 * pad - k + 1, wo = w + 2 * pad - k + 1;
    imap_t v = new[ho * wo * c];
    for (int r = 0; r < ho; r++)
      for (int x = 0; x < wo; x++)
        for (int o = 0; o < c; o++) begin
          int s;
          s = 0;
          for (int kh = 0; kh < k; kh++)
            for (int kw = 0; kw < k; kw++) begin
              int rr, xx;
              rr = r + kh - pad; xx = x + kw - pad;
              if (rr >= 0 && rr < h && xx >= 0 && xx < w && m[(rr * w + xx) * c + o])
                s += wt[(o * k + kh) * k + kw];
            end
          v[(r * wo + x) * c + o] = s;
        end
    return v;
  endfunction

  // integrate-and-fire: spike where V >= vth
  function automatic bmap_t fire(input imap_t v, input int vth);
    bmap_t o = new[v.size()];
    foreach (v[i]) o[i] = (v[i] >= vth);
    return o;
  endfunction

  // median of the potentials: a threshold that makes about half the neurons fire
  function automatic int median(input imap_t v);
    int q [$];
    foreach (v[i]) q.push_back(v[i]);
    q.sort();
    return q[q.size() / 2];
  endfunction

endpackage
