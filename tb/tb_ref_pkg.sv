// tb_ref_pkg: reference model shared by the accelerator testbenches.
//
// It computes, with plain loops and without any of the RTL's structure, what
// the accelerator must produce: the fixed-point input projection, two LSTM
// layers, the classifier and the regressors for every predicted instruction of
// every sliding window. The arithmetic rules it follows are the ones the RTL
// documents: INT8 activations with 5 fraction bits, INT8 weights with 6,
// v = sat8((acc + (bias << 6)) >>> 6), sigmoid and tanh rounded to the nearest
// step of 1/32 (computed here at run time with $exp), the cell update
// c' = sat16((f*c + i*g) >>> 5), h = sat8((o * tanh(sat8(c'))) >>> 5), and the
// class/mask selection of the two regressors.
//
// Weights live in gw[row][col] in the accelerator's row layout (row = input
// element, col = output), features in feat[instruction][0..12].
package tb_ref_pkg;
  import ns_pkg::*;

  logic signed [7:0] gw   [GW_USED][256];
  logic signed [7:0] feat [][13];
  int                pred_val [int];
  bit                pred_cls [int];
  longint            pred_margin [int];   // lg1 - lg0

  function automatic int rsat(input longint v, input int lo, input int hi);
    return (v > hi) ? hi : (v < lo) ? lo : int'(v);
  endfunction

  function automatic int rnd(input real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(-x + 0.5);
  endfunction

  function automatic int ref_sig(input int v);
    return rnd(32.0 / (1.0 + $exp(-real'(v) / 32.0)));
  endfunction

  function automatic int ref_tanh(input int v);
    real e;
    e = $exp(2.0 * real'(v) / 32.0);
    return rnd(32.0 * (e - 1.0) / (e + 1.0));
  endfunction

  // kind: 0 identity, 1 relu, 2 sigmoid, 3 tanh
  function automatic int ref_act(input longint acc, input int bias, input int kind);
    int v;
    v = rsat((acc + longint'(bias) * 64) >>> 6, -128, 127);
    case (kind)
      1: return (v < 0) ? 0 : v;
      2: return ref_sig(v);
      3: return ref_tanh(v);
      default: return v;
    endcase
  endfunction

  // y[j] = sum_k x[k] * gw[base+k][j]
  function automatic void matvec(input int base, input int k, input int x [256],
                                 inout longint y [256]);
    for (int j = 0; j < 256; j++)
      for (int i = 0; i < k; i++)
        y[j] += longint'(x[i]) * longint'(gw[base+i][j]);
  endfunction

  // fills random weights in [-wmax, wmax]
  function automatic void rand_weights(input int wmax);
    for (int r = 0; r < GW_USED; r++)
      for (int j = 0; j < 256; j++)
        gw[r][j] = 8'(int'($urandom_range(2*wmax, 0)) - wmax);
  endfunction

  // makes the two class logits differ only by a small h-dependent term, so
  // that random weights give both latency classes
  function automatic void shape_heads();
    for (int k = 0; k < 64; k++) gw[GW_FC2 + k][1] = gw[GW_FC2 + k][0];
    for (int k = 0; k < 256; k++)
      gw[GW_REG + k][1] = 8'(int'(gw[GW_REG + k][0]) + int'($urandom_range(48, 0)) - 24);
    gw[GW_HEAD_B][1] = gw[GW_HEAD_B][0];
  endfunction

  // after a first ref_run: moves the class-1 bias so that the threshold sits at
  // the median margin, then runs the reference again
  function automatic void balance_classes(input int n, input int seq_n, input int seq_r);
    longint m [$];
    foreach (pred_margin[i]) m.push_back(pred_margin[i]);
    if (m.size() == 0) return;
    m.sort();
    gw[GW_HEAD_B][1] = 8'(rsat(int'(gw[GW_HEAD_B][0]) - int'(m[m.size()/2] / 64), -128, 127));
    ref_run(n, seq_n, seq_r);
  endfunction

  function automatic void rand_features(input int n, input int fmax);
    feat = new[n];
    for (int i = 0; i < n; i++)
      for (int f = 0; f < 13; f++)
        feat[i][f] = 8'(int'($urandom_range(2*fmax, 0)) - fmax);
  endfunction

  // runs the whole epoch; fills pred_val / pred_cls by instruction index
  function automatic void ref_run(input int n, input int seq_n, input int seq_r);
    int s, nwin;
    pred_val.delete();
    pred_cls.delete();
    pred_margin.delete();
    s = (seq_n - seq_r) / 2;
    nwin = (n >= seq_n) ? (n - seq_n) / seq_r + 1 : 0;
    for (int w = 0; w < nwin; w++) begin
      int h [2][256];
      int c [2][256];
      for (int l = 0; l < 2; l++) for (int j = 0; j < 256; j++) begin h[l][j] = 0; c[l][j] = 0; end
      for (int t = 0; t < seq_n; t++) begin
        int x [256], xin [256], gt [4][256], z [256];
        longint a [256];
        int idx;
        idx = w * seq_r + t;
        for (int j = 0; j < 256; j++) x[j] = (j < 13) ? int'(feat[idx][j]) : 0;
        for (int j = 0; j < 256; j++) a[j] = 0;
        matvec(GW_PROJ, 13, x, a);
        for (int j = 0; j < 256; j++) xin[j] = ref_act(a[j], gw[GW_PROJ_B][j], 0);
        for (int l = 0; l < 2; l++) begin
          int hp [256];
          hp = h[l];
          for (int g = 0; g < 4; g++) begin
            for (int j = 0; j < 256; j++) a[j] = 0;
            matvec(gw_wih(l, g), 256, xin, a);
            matvec(gw_whh(l, g), 256, hp, a);
            for (int j = 0; j < 256; j++)
              gt[g][j] = ref_act(a[j], gw[gw_bias(l, g)][j], (g == 2) ? 3 : 2);
          end
          for (int j = 0; j < 256; j++) begin
            int cn, th;
            cn = rsat((longint'(gt[1][j]) * c[l][j] + longint'(gt[0][j]) * gt[2][j]) >>> 5,
                      -32768, 32767);
            c[l][j] = cn;
            th = ref_tanh(rsat(cn, -128, 127));
            h[l][j] = rsat((longint'(gt[3][j]) * th) >>> 5, -128, 127);
          end
          xin = h[l];
        end
        if (t >= s && t < s + seq_r) begin
          longint lg0, lg1, rs, rl;
          for (int j = 0; j < 256; j++) a[j] = 0;
          matvec(GW_FC1, 256, h[1], a);
          for (int j = 0; j < 256; j++) z[j] = ref_act(a[j], gw[GW_FC1_B][j], 1);
          for (int j = 0; j < 256; j++) a[j] = 0;
          matvec(GW_FC2, 64, z, a);
          matvec(GW_REG, 256, h[1], a);
          lg0 = a[0] + longint'(gw[GW_HEAD_B][0]) * 64;
          lg1 = a[1] + longint'(gw[GW_HEAD_B][1]) * 64;
          rs  = a[2] + longint'(gw[GW_HEAD_B][2]) * 64;
          rl  = a[3] + longint'(gw[GW_HEAD_B][3]) * 64;
          pred_cls[idx] = (lg1 > lg0);
          pred_margin[idx] = lg1 - lg0;
          pred_val[idx] = rsat(((lg1 > lg0) ? rl : rs) >>> 6, -32768, 32767);
        end
      end
    end
  endfunction

  // host memory image of one weight row: 256 bytes, column j at byte j
  function automatic logic [2047:0] weight_row(input int r);
    logic [2047:0] v;
    for (int j = 0; j < 256; j++) v[j*8 +: 8] = gw[r][j];
    return v;
  endfunction

  function automatic logic [103:0] feat_word(input int i);
    logic [103:0] v;
    for (int f = 0; f < 13; f++) v[f*8 +: 8] = feat[i][f];
    return v;
  endfunction
endpackage
