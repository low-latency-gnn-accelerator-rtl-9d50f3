// gnn_tb_pkg -- reference model and stimulus helpers for the decoder testbenches.
//
// Holds a random model (weights, biases) in plain integer arrays, builds
// surface-code-like input graphs (detection events on a d=7 lattice over 7
// rounds, each node joined to its k=10 nearest neighbours, edge weight
// 1/distance^2 in Q4.10), and computes the network output layer by layer with
// straightforward loops in the same fixed-point arithmetic the hardware
// specifies: products saturated to the accumulator width, sums wrapping at
// it, bias added in the accumulator, round half up to the feature format,
// saturation and ReLU.  It also packs the weights into the block-RAM row layout
// the decoder expects (lane p of row r of layer l holds the weight that lane
// multiplies in folded cycle r).
package gnn_tb_pkg;
  import gnn_pkg::*;

  int wt1  [MAXL][DMAX][DMAX];   // self weights (GraphConv) or dense weights
  int wt2  [MAXL][DMAX][DMAX];   // neighbour weights (GraphConv)
  int bs   [MAXL][DMAX];         // biases, Q1.4
  int gx   [64][NIN];            // graph node features, Q12.5
  int ge   [64][64];             // edge weights, Q4.10
  int act  [2][64][DMAX];        // reference activations (ping-pong)
  int aggr [64][DMAX];

  function automatic int srand(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  function automatic void gen_model(int model);
    for (int l = 0; l < num_layers(model); l++) begin
      for (int f = 0; f < l_dout(model, l); f++) begin
        bs[l][f] = srand(-6, 6);
        for (int o = 0; o < l_din(model, l); o++) begin
          wt1[l][f][o] = srand(-110, 110);
          wt2[l][f][o] = srand(-110, 110);
        end
      end
    end
  endfunction

  // Random graph of n detection events: features (is_X, is_Z, x, y, t).
  function automatic void gen_graph(int n);
    int cx [64], cy [64], ct [64];
    for (int i = 0; i < n; i++) begin
      bit clash;
      do begin
        cx[i] = srand(0, 6); cy[i] = srand(0, 6); ct[i] = srand(0, 6);
        clash = 0;
        for (int j = 0; j < i; j++)
          if (cx[j] == cx[i] && cy[j] == cy[i] && ct[j] == ct[i]) clash = 1;
      end while (clash);
      gx[i][0] = ((cx[i] + cy[i]) % 2 == 0) ? 32 : 0;
      gx[i][1] = ((cx[i] + cy[i]) % 2 == 0) ? 0 : 32;
      gx[i][2] = cx[i] * 32;
      gx[i][3] = cy[i] * 32;
      gx[i][4] = ct[i] * 32;
    end
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) ge[i][j] = 0;
    // k nearest neighbours, made symmetric
    for (int i = 0; i < n; i++) begin
      bit used [64];
      for (int j = 0; j < 64; j++) used[j] = 0;
      used[i] = 1;
      for (int k = 0; k < 10 && k < n - 1; k++) begin
        int best = -1, bd = 1 << 30;
        for (int j = 0; j < n; j++) begin
          int d2 = (cx[i]-cx[j])**2 + (cy[i]-cy[j])**2 + (ct[i]-ct[j])**2;
          if (!used[j] && d2 < bd) begin bd = d2; best = j; end
        end
        used[best] = 1;
        ge[i][best] = (1024 + bd / 2) / bd;
        ge[best][i] = ge[i][best];
      end
    end
  endfunction

  function automatic longint wrapw(longint v, int w);
    longint m = (64'sd1 <<< w);
    longint r = v & (m - 1);
    return (r >= (m >>> 1)) ? r - m : r;
  endfunction

  function automatic longint satw(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    longint lo = -(64'sd1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // accumulator -> feature: round half up, saturate, optional ReLU
  function automatic int to_feat(longint acc, int fw, bit relu);
    longint t = satw((acc + (1 << (AF - FF - 1))) >>> (AF - FF), fw);
    if (relu && t < 0) t = 0;
    return int'(t);
  endfunction

  function automatic int gmp_factor(int n);
    return (1024 + n / 2) / n;
  endfunction

  // Weight of lane p in weight-store row `row` (absolute address).
  function automatic int row_weight(int model, int mults, int nmax, int row, int p);
    int nl = num_layers(model);
    int gb = gmp_base(model, mults);
    if (row >= gb) begin
      int n = row - gb;
      return (p < DMAX && n >= 1 && n <= nmax) ? gmp_factor(n) : 0;
    end
    for (int l = 0; l < nl; l++) begin
      int base = l_wrow(model, l, mults);
      if (l_kind(model, l) != L_GMP && row >= base && row < base + l_rows(model, l, mults)) begin
        int r = row - base, lg = l_lg(model, l), din = l_din(model, l), dout = l_dout(model, l);
        int opc = mults >> lg, g = p >> lg, o = p & ((1 << lg) - 1);
        int q = r * opc + g;
        if (l_kind(model, l) == L_GCONV) begin
          int f = q % dout;
          if (o < din) return wt1[l][f][o];
          if (o < 2 * din) return wt2[l][f][o - din];
          return 0;
        end
        if (q < dout && o < din) return wt1[l][q][o];
        return 0;
      end
    end
    return 0;
  endfunction

  // Reference forward pass; returns the output logit (feature format).
  function automatic int ref_logit(int model, int n, int fw, int aw);
    int cur = 0;
    int sw = fw + $clog2(64);
    for (int i = 0; i < n; i++)
      for (int f = 0; f < DMAX; f++) act[0][i][f] = (f < NIN) ? gx[i][f] : 0;
    for (int l = 0; l < num_layers(model); l++) begin
      int din = l_din(model, l), dout = l_dout(model, l);
      bit relu = l_relu(model, l);
      int nxt = 1 - cur;
      case (l_kind(model, l))
        L_GCONV: begin
          for (int i = 0; i < n; i++)
            for (int f = 0; f < din; f++) begin
              longint s = 0;
              for (int j = 0; j < n; j++) s += satw(longint'(act[cur][j][f]) * ge[i][j], aw);
              aggr[i][f] = to_feat(wrapw(s, aw), fw, 0);
            end
          for (int i = 0; i < n; i++)
            for (int f = 0; f < DMAX; f++) begin
              longint s = 0;
              if (f < dout) begin
                for (int o = 0; o < din; o++) begin
                  s += satw(longint'(act[cur][i][o]) * wt1[l][f][o], aw);
                  s += satw(longint'(aggr[i][o]) * wt2[l][f][o], aw);
                end
                s = wrapw(wrapw(s, aw) + (longint'(bs[l][f]) <<< (AF - BF)), aw);
                act[nxt][i][f] = to_feat(s, fw, relu);
              end else act[nxt][i][f] = 0;
            end
        end
        L_GMP: begin
          for (int f = 0; f < DMAX; f++) begin
            longint s = 0;
            if (f < din) for (int i = 0; i < n; i++) s += act[cur][i][f];
            s = wrapw(s, sw);
            act[nxt][0][f] = to_feat(satw(s * gmp_factor(n), aw), fw, 0);
          end
        end
        default: begin
          for (int f = 0; f < DMAX; f++) begin
            longint s = 0;
            if (f < dout) begin
              for (int o = 0; o < din; o++) s += satw(longint'(act[cur][0][o]) * wt1[l][f][o], aw);
              s = wrapw(wrapw(s, aw) + (longint'(bs[l][f]) <<< (AF - BF)), aw);
              act[nxt][0][f] = to_feat(s, fw, relu);
            end else act[nxt][0][f] = 0;
          end
        end
      endcase
      cur = nxt;
    end
    return act[cur][0][0];
  endfunction

  // Reference sigmoid (PLAN) in 1/256 units, saturated to 255.
  function automatic int ref_prob(int logit, int ff);
    int ax = (logit < 0) ? -logit : logit;
    int one = 1 << ff;
    int y;
    if (ax >= 5 * one)               y = 256;
    else if (8 * ax >= 19 * one)     y = (ax * 256) / (32 * one) + 216;
    else if (ax >= one)              y = (ax * 256) / (8 * one) + 160;
    else                             y = (ax * 256) / (4 * one) + 128;
    if (logit < 0) return 256 - y;
    return (y > 255) ? 255 : y;
  endfunction
endpackage
