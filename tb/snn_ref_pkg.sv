// snn_ref_pkg: plain software model of one spiking convolution layer and of
// 2x2 max pooling, used by the layer and full-network testbenches, plus the
// bitmap encoding that turns a dense weight tensor into the mask / packed
// non-zero weight RAM images the detectors expect.
// Spike arrays are flat, index ((t*C + c)*H + h)*W + w.
// Weights are flat, index ((co*CI + ci)*K + kh)*K + kw.
package snn_ref_pkg;
  typedef int iarr[];

  function automatic int sidx(int t, int c, int h, int w, int C, int H, int W);
    return ((t*C + c)*H + h)*W + w;
  endfunction

  // Padded 'valid' convolution followed by integer LIF/IF dynamics
  // (tau = 2, V_reset = 0, fire when V > Vth, membrane cleared per pixel).
  function automatic iarr conv_lif(int H, int W, int CI, int PAD, int K, int CO, int T,
                                   bit leak, iarr s_in, iarr wt, iarr bias, iarr vth,
                                   output int HO, output int WO);
    iarr s_out;
    HO = H + 2*PAD - K + 1;
    WO = W + 2*PAD - K + 1;
    s_out = new[T*CO*HO*WO];
    for (int co = 0; co < CO; co++)
      for (int ho = 0; ho < HO; ho++)
        for (int wo = 0; wo < WO; wo++) begin
          int v;
          v = 0;
          for (int t = 0; t < T; t++) begin
            int cur;
            cur = bias[co];
            for (int ci = 0; ci < CI; ci++)
              for (int kh = 0; kh < K; kh++)
                for (int kw = 0; kw < K; kw++) begin
                  int h, w;
                  h = ho + kh - PAD; w = wo + kw - PAD;
                  if (h >= 0 && h < H && w >= 0 && w < W)
                    if (s_in[sidx(t, ci, h, w, CI, H, W)] != 0)
                      cur += wt[((co*CI + ci)*K + kh)*K + kw];
                end
            if (leak) v = v + ((cur - v) >>> 1);
            else      v = v + cur;
            if (v > vth[co]) begin
              s_out[sidx(t, co, ho, wo, CO, HO, WO)] = 1; v = 0;
            end else s_out[sidx(t, co, ho, wo, CO, HO, WO)] = 0;
          end
        end
    return s_out;
  endfunction

  function automatic iarr maxpool2(int H, int W, int C, int T, iarr s_in,
                                   output int HO, output int WO);
    iarr s_out;
    HO = H/2; WO = W/2;
    s_out = new[T*C*HO*WO];
    for (int t = 0; t < T; t++)
      for (int c = 0; c < C; c++)
        for (int h = 0; h < HO; h++)
          for (int w = 0; w < WO; w++)
            s_out[sidx(t, c, h, w, C, HO, WO)] =
              s_in[sidx(t, c, 2*h,   2*w,   C, H, W)] | s_in[sidx(t, c, 2*h,   2*w+1, C, H, W)] |
              s_in[sidx(t, c, 2*h+1, 2*w,   C, H, W)] | s_in[sidx(t, c, 2*h+1, 2*w+1, C, H, W)];
    return s_out;
  endfunction

  // Random sparse 4-bit weights: non-zero with probability pct_nz percent.
  function automatic iarr rand_weights(int n, int pct_nz);
    iarr w;
    w = new[n];
    foreach (w[i]) begin
      if (($urandom % 100) < pct_nz) begin
        int v;
        v = int'($urandom % 15) - 8;   // -8..6, skip 0
        if (v >= 0) v = v + 1;
        w[i] = v;
      end else w[i] = 0;
    end
    return w;
  endfunction

  // Stream word (h, w, group, t) of a PCI-wide channel-group stream.
  function automatic logic [63:0] stream_word(iarr s, int C, int H, int W, int PCI,
                                              int h, int w, int g, int t);
    logic [63:0] v;
    v = '0;
    for (int l = 0; l < PCI; l++) v[l] = s[sidx(t, g*PCI + l, h, w, C, H, W)][0];
    return v;
  endfunction

  // One write of a detector parameter RAM.
  typedef struct {
    int det; int sel; int addr; longint data;
  } cfg_wr_t;

  // Bitmap encoding of one layer: detector j serves channels g*PCO+j.
  // Mask word (g*KKC + (kh*K+kw)*CIG + cig) holds lanes ci = cig*PCI+lane;
  // non-zero weights are packed per detector in (g, kh, kw, cig, lane) order.
  // sel codes: 0 mask, 1 weight, 2 bias, 3 threshold (ff_pkg::cfg_sel_e).
  function automatic void encode_layer(int CI, int K, int PCI, int CIG, int PCO, int COG,
                                       iarr wt, iarr bias, iarr vth, ref cfg_wr_t q[$]);
    for (int j = 0; j < PCO; j++) begin
      int wa;
      wa = 0;
      for (int g = 0; g < COG; g++) begin
        int co;
        co = g*PCO + j;
        q.push_back('{j, 2, g, longint'(bias[co])});
        q.push_back('{j, 3, g, longint'(vth[co])});
        for (int kh = 0; kh < K; kh++)
          for (int kw = 0; kw < K; kw++)
            for (int cg = 0; cg < CIG; cg++) begin
              longint m;
              m = 0;
              for (int l = 0; l < PCI; l++) begin
                int w;
                w = wt[((co*CI + cg*PCI + l)*K + kh)*K + kw];
                if (w != 0) begin
                  m = m | (longint'(1) << l);
                  q.push_back('{j, 1, wa, longint'(w)});
                  wa++;
                end
              end
              q.push_back('{j, 0, (g*K*K*CIG) + (kh*K + kw)*CIG + cg, m});
            end
      end
    end
  endfunction
endpackage
