// lpyolo_ref_pkg: bit-exact software model of the LPYOLO network for the
// testbenches, written with plain loops over whole feature maps and
// independent of the RTL's streaming structure.
//
// An lpyolo_ref object holds one model of a given precision (mWnA).
// rand_weights() draws random weights and infer(..., pick=1) derives, from the
// accumulator ranges that a given image produces, per-channel thresholds (4-bit ReLU layers) and
// HardTanh scale/bias (last layer), spread so that every activation level,
// including both saturation ends, occurs. infer() then runs one image
// through the network with those parameters. load_* helpers give the
// (word, lane) position of each parameter in the hardware memories.
package lpyolo_ref_pkg;
  import lpyolo_pkg::*;

class lpyolo_ref;
  int wq, aq;                // weight and activation bits of conv1..conv8
  int wts   [NUM_CONV][$];   // [layer][oc*K*K*CIN + (ky*K+kx)*CIN + c]
  int thr   [NUM_CONV][$];   // [layer][oc*NT + t]
  int amul  [$];             // last layer, per channel
  int abias [$];

  // Event counters of the last infer() call.
  int n_act_zero, n_act_full, n_ht_low, n_ht_high, n_pool1_changed, n_pad_nonzero;

  function new(int wq_ = DEF_WQ, int aq_ = DEF_AQ);
    wq = wq_;
    aq = aq_;
  endfunction

  function int nthr(int i);
    return (1 << layer_obits(i, aq)) - 1;
  endfunction

  function void conv_acc(int H, int W, int CI, int CO, int K, int li,
                                   const ref int in_a[$], ref longint acc[$]);
    int P = (K - 1) / 2;
    acc.delete();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int oc = 0; oc < CO; oc++) begin
          longint s = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int iy = y + ky - P, ix = x + kx - P;
              if (iy < 0 || iy >= H || ix < 0 || ix >= W) continue;
              for (int c = 0; c < CI; c++)
                s += longint'(in_a[(iy*W + ix)*CI + c]) *
                     longint'(wts[li][oc*K*K*CI + (ky*K + kx)*CI + c]);
            end
          acc.push_back(s);
        end
  endfunction

  function void pool_ref(int H, int W, int C, int S, const ref int in_a[$], ref int out_a[$]);
    int HO = (S == 2) ? H/2 : H, WO = (S == 2) ? W/2 : W;
    out_a.delete();
    for (int y = 0; y < HO; y++)
      for (int x = 0; x < WO; x++)
        for (int c = 0; c < C; c++) begin
          int m = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (y*S+dy < H && x*S+dx < W && in_a[((y*S+dy)*W + x*S+dx)*C + c] > m)
                m = in_a[((y*S+dy)*W + x*S+dx)*C + c];
          if (S == 1 && m != in_a[(y*W + x)*C + c]) n_pool1_changed++;
          out_a.push_back(m);
        end
  endfunction

  function void rand_weights();
    for (int i = 0; i < NUM_CONV; i++) begin
      int n = L_KSZ[i]*L_KSZ[i]*L_CIN[i]*L_COUT[i];
      int half = 1 << (layer_wbits(i, wq) - 1);
      wts[i].delete();
      for (int j = 0; j < n; j++) wts[i].push_back(int'($urandom_range(2*half - 1)) - half);
    end
  endfunction

  // Runs the image through the network. With pick=1 the activation
  // parameters are first derived from this image's accumulator ranges.
  function void infer(int IH, int IW, const ref int img[$], input bit pick, ref int out_a[$]);
    int cur[$], nxt[$];
    longint acc[$];
    n_act_zero = 0; n_act_full = 0; n_ht_low = 0; n_ht_high = 0; n_pool1_changed = 0;
    cur = img;
    for (int i = 0; i < NUM_CONV; i++) begin
      int H = IH >> L_SHIFT_HW[i], W = IW >> L_SHIFT_HW[i];
      int CO = L_COUT[i];
      conv_acc(H, W, L_CIN[i], CO, L_KSZ[i], i, cur, acc);
      if (pick) begin
        if (i < NUM_CONV - 1) thr[i].delete();
        else begin amul.delete(); abias.delete(); end
        for (int oc = 0; oc < CO; oc++) begin
          longint lo = acc[oc], hi = acc[oc], rng;
          for (int p = 0; p < H*W; p++) begin
            if (acc[p*CO+oc] < lo) lo = acc[p*CO+oc];
            if (acc[p*CO+oc] > hi) hi = acc[p*CO+oc];
          end
          rng = hi - lo;
          if (i < NUM_CONV - 1) begin
            int nt = nthr(i);
            for (int t = 0; t < nt; t++)
              thr[i].push_back(int'(lo + (rng * (2*t + 3)) / (2*nt + 4)));
          end else begin
            // Map [lo + rng/8, hi - rng/8] onto 0..255, clipping outside.
            longint lo2 = lo + rng/8, span = rng - rng/4, m, b;
            if (span < 1) span = 1;
            m = (255 * 65536) / span;
            if (m > 32767) m = 32767;
            if (m < 1) m = 1;
            while ((lo2 < 0 ? -lo2 : lo2) * m > 64'sd2000000000 && m > 1) m = m / 2;
            b = -lo2 * m;
            amul.push_back(int'(m));
            abias.push_back(int'(b));
          end
        end
      end
      nxt.delete();
      for (int p = 0; p < H*W; p++)
        for (int oc = 0; oc < CO; oc++) begin
          longint a = acc[p*CO+oc];
          int v = 0;
          if (i < NUM_CONV - 1) begin
            int nt = nthr(i);
            for (int t = 0; t < nt; t++) if (a >= longint'(thr[i][oc*nt + t])) v++;
            if (v == 0) n_act_zero++;
            if (v == nt) n_act_full++;
          end else begin
            longint l = (a * longint'(amul[oc]) + longint'(abias[oc])) >>> 16;
            if (l < 0) begin v = 0; n_ht_low++; end
            else if (l > 255) begin v = 255; n_ht_high++; end
            else v = int'(l);
          end
          nxt.push_back(v);
        end
      if (i < 6) pool_ref(H, W, CO, (i == 5) ? 1 : 2, nxt, cur);
      else cur = nxt;
    end
    out_a = cur;
  endfunction

  // Position of weight (oc, k) of layer i in its mvau memory.
  function void wpos(int i, int oc, int k, output int word, output int lane);
    int sf = L_KSZ[i]*L_KSZ[i]*L_CIN[i] / L_SIMD[i];
    word = (oc / L_PE[i]) * sf + k / L_SIMD[i];
    lane = (oc % L_PE[i]) * L_SIMD[i] + k % L_SIMD[i];
  endfunction

endclass

endpackage
