// tb_ref_pkg -- reference model and stimulus helpers for the EdgeDRNN
// testbenches.
//
// weight_at(addr) defines the contents of the weight DRAM: a hashed byte per
// address, limited to [-WMAG, WMAG-1] so that sums stay well inside 16 bits.
// sig_ref / tanh_ref compute the activation tables from real arithmetic
// (round half up of the exact function, tanh clipped to 1 - 2^-F), not from
// the breakpoint table of the RTL.  DeltaGruRef steps a stack of delta-GRU
// layers with the number formats of the design (Q8.8 activations, weights with
// W_FRAC fractional bits, 32-bit delta memories, Q1.4 LUT outputs) and the
// delta rule with per-layer input and hidden thresholds.  It also counts what
// happened: columns sent, elements skipped because the delta was zero, and
// elements skipped because the delta was below the threshold.
package tb_ref_pkg;

  localparam int WMAG  = 24;
  localparam int AFRAC = 8;
  localparam int WFRAC = 6;
  localparam int F     = 4;

  function automatic int weight_at(input longint addr);
    longint unsigned v;
    v = (longint'(addr) * 64'd2654435761 + 64'd12345) ^ (longint'(addr) >> 7);
    v = v ^ (v >> 13);
    return int'(v % (2 * WMAG)) - WMAG;
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int asr(input longint v, input int n);
    return int'(v >>> n);
  endfunction

  function automatic int acc2act(input int m);
    return sat16(longint'(m) >>> WFRAC);
  endfunction

  function automatic int sig_ref(input int x);
    real xr, y;
    xr = real'(x) / 256.0;
    y  = 1.0 / (1.0 + $exp(-xr));
    return $rtoi($floor(y * 16.0 + 0.5));
  endfunction

  function automatic int tanh_ref(input int x);
    real xr, y;
    int  q;
    xr = real'(x) / 256.0;
    if (xr > 20.0)       y = 1.0;
    else if (xr < -20.0) y = -1.0;
    else                 y = ($exp(2.0 * xr) - 1.0) / ($exp(2.0 * xr) + 1.0);
    q = $rtoi($floor(y * 16.0 + 0.5));
    if (q > 15)  q = 15;
    if (q < -16) q = -16;
    return q;
  endfunction

  // new hidden state of one neuron from its four delta memories and h_{t-1}
  function automatic int gru_cell(input int mr, input int mu, input int mxc_a,
                                  input int mhc_a, input int hp);
    int r, u, mhc, mxc, rm, pre, c, omu, uh, omuc;
    r    = sig_ref(acc2act(mr));
    u    = sig_ref(acc2act(mu));
    mxc  = acc2act(mxc_a);
    mhc  = acc2act(mhc_a);
    rm   = asr(longint'(r) * mhc, F);
    pre  = sat16(longint'(mxc) + rm);
    c    = tanh_ref(pre);
    omu  = 16 - u;
    uh   = asr(longint'(u) * hp, F);
    omuc = asr(longint'(omu) * c, 2 * F - AFRAC);
    return sat16(longint'(uh) + omuc);
  endfunction

  class DeltaGruRef;
    int     L, I, H;
    longint wbase[];
    int     thx[], thh[];
    int     shat[][];          // [layer][column]
    int     h[][];             // [layer][neuron]
    int     m[][];             // [layer][bank*H + neuron]  bank: 0 r, 1 u, 2 xc, 3 hc
    int     n_sent, n_zero, n_below, n_bias;
    int     sent_layer[];      // columns sent in the last step per layer
    int     sent_col[$];       // (layer << 16) | column, in order, last step

    function new(int L_, int I_, int H_);
      L = L_; I = I_; H = H_;
      wbase = new[L]; thx = new[L]; thh = new[L];
      shat = new[L]; h = new[L]; m = new[L]; sent_layer = new[L];
      for (int l = 0; l < L; l++) begin
        shat[l] = new[xdim(l) + 1 + H];
        h[l]    = new[H];
        m[l]    = new[4 * H];
        foreach (shat[l][i]) shat[l][i] = 0;
        foreach (h[l][i]) h[l][i] = 0;
        foreach (m[l][i]) m[l][i] = 0;
      end
      n_sent = 0; n_zero = 0; n_below = 0; n_bias = 0;
    endfunction

    function int xdim(int l);
      return (l == 0) ? I : H;
    endfunction

    // one time step of the whole stack; returns h_t of the last layer
    function void step(input int x[], output int y[]);
      int xin[];
      xin = x;
      sent_col.delete();
      for (int l = 0; l < L; l++) begin
        int s[];
        int ncol;
        ncol = xdim(l) + 1 + H;
        s = new[ncol];
        s[0] = 256;
        for (int i = 0; i < xdim(l); i++) s[1 + i] = xin[i];
        for (int j = 0; j < H; j++) s[1 + xdim(l) + j] = h[l][j];
        sent_layer[l] = 0;
        for (int e = 0; e < ncol; e++) begin
          int d, th;
          bit ish;
          ish = (e > xdim(l));
          th  = ish ? thh[l] : thx[l];
          d   = sat16(longint'(s[e]) - longint'(shat[l][e]));
          if (d == 0) begin
            n_zero++;
          end else if ((d < 0 ? -d : d) < th) begin
            n_below++;
          end else begin
            n_sent++;
            sent_layer[l]++;
            sent_col.push_back((l << 16) | e);
            if (e == 0) n_bias++;
            shat[l][e] = shat[l][e] + d;
            for (int n = 0; n < 3 * H; n++) begin
              int w, g, j, b;
              w = weight_at(wbase[l] + longint'(e) * 3 * H + longint'(n));
              g = n / H; j = n % H;
              b = (g == 0) ? 0 : (g == 2) ? 1 : (ish ? 3 : 2);
              m[l][b * H + j] = m[l][b * H + j] + w * d;
            end
          end
        end
        // activation
        for (int j = 0; j < H; j++)
          h[l][j] = gru_cell(m[l][0 * H + j], m[l][1 * H + j], m[l][2 * H + j],
                             m[l][3 * H + j], h[l][j]);
        xin = h[l];
      end
      y = h[L - 1];
    endfunction
  endclass

endpackage
