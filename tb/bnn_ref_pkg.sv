// bnn_ref_pkg: behavioural reference of one binary-approximated CNN layer,
// used by the systolic-array and top-level testbenches.
//
// A layer_model holds random binary tensors B[m][ch][i] (i runs over the
// kernel window in channel, row, column order), 8-bit alphas with a shift,
// biases, and computes outputs the direct way:
//   o  = bias[ch] + sum_m ((sum_i (B ? x : -x)) * alpha_m) >>> shift_m
//   y  = clip(floor((o + 2^(q-1)) / 2^q), -128, 127)
//   conv: out = max(0, max over the pooling window of y); dense: out = y
// It also lays the parameters out in the accelerator's memories (weight
// words per processing array, alpha and bias addresses).
package bnn_ref_pkg;

  function automatic int qsat(longint o, int q);
    longint v;
    v = (q == 0) ? o : o + (longint'(1) << (q - 1));
    v = v >>> q;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  class layer_model;
    int lt;                       // 0 conv, 1 dense, 2 depth-wise
    int wi, hi, ci, wb, hb, wp, hp, d, kp, q;
    int darch, march;
    int nc, nt;
    bit wbits [][][];             // [m][ch][i]
    int alpha [][];
    int shf [][];
    int bias [];
    int nsat;                     // saturated samples in the last compute
    int x [];                     // input of the current compute

    function new(int lt, int wi, int hi, int ci, int wb, int hb, int wp, int hp,
                 int d, int kp, int q, int darch, int march);
      this.lt = lt; this.wi = wi; this.hi = hi; this.ci = ci; this.wb = wb; this.hb = hb;
      this.wp = wp; this.hp = hp; this.d = d; this.kp = kp; this.q = q;
      this.darch = darch; this.march = march;
      if (lt == 1) begin this.wb = 1; this.hb = 1; this.wi = ci; this.hi = 1; this.wp = 1; this.hp = 1; end
      nc = (lt == 2 ? 1 : ci) * this.hb * this.wb;
      if (lt == 1) nc = ci;
      nt = kp * march;
      wbits = new[nt];
      alpha = new[nt];
      shf = new[nt];
      foreach (wbits[m]) begin
        wbits[m] = new[d];
        alpha[m] = new[d];
        shf[m] = new[d];
        foreach (wbits[m][c]) begin
          wbits[m][c] = new[nc];
          foreach (wbits[m][c][i]) wbits[m][c][i] = 1'($urandom);
          alpha[m][c] = int'($signed(8'($urandom % 256)));
          shf[m][c] = $urandom % 3;
        end
      end
      bias = new[d];
      foreach (bias[c]) bias[c] = int'($urandom % 4001) - 2000;
    endfunction

    function int step();      return (lt == 2) ? 1 : darch;               endfunction
    function int ngroups();   return (d + step() - 1) / step();           endfunction
    function int nwords();    return ngroups() * kp * nc;                 endfunction
    function int ow();        return (lt == 1) ? 1 : (wi - wb + 1) / wp;  endfunction
    function int oh();        return (lt == 1) ? 1 : (hi - hb + 1) / hp;  endfunction
    function int oplane();    return ow() * oh();                         endfunction
    function int plane();     return (lt == 1) ? 1 : wi * hi;             endfunction
    function int anchors();   return (lt == 1) ? 1 : ow() * wp * oh() * hp; endfunction

    // weight word of processing array m at offset a from the layer base
    function logic [31:0] wword(int m, int a);
      int g, r, k, i, ch;
      logic [31:0] w;
      g = a / (kp * nc); r = a % (kp * nc); k = r / nc; i = r % nc;
      w = '0;
      for (int dd = 0; dd < darch && dd < 32; dd++) begin
        ch = g * step() + dd;
        if (ch < d && (lt != 2 || dd == 0)) w[dd] = wbits[k * march + m][ch][i];
      end
      return w;
    endfunction

    // input element i of the window anchored at (oy, ox) for channel ch
    function int xin(int ch, int oy, int ox, int i);
      int c, kh, kw;
      if (lt == 1) return x[i];
      c = i / (hb * wb); kh = (i / wb) % hb; kw = i % wb;
      if (lt == 2) c = ch;
      return x[c * wi * hi + (oy + kh) * wi + ox + kw];
    endfunction

    function int pre(int ch, int oy, int ox);
      longint o, p;
      o = bias[ch];
      for (int m = 0; m < nt; m++) begin
        p = 0;
        for (int i = 0; i < nc; i++)
          p += wbits[m][ch][i] ? xin(ch, oy, ox, i) : -xin(ch, oy, ox, i);
        o += (p * alpha[m][ch]) >>> shf[m][ch];
      end
      return qsat(o, q);
    endfunction

    // outputs in channel planes: out[ch*oplane + py*ow + px]
    function void compute(input int in [], output int out []);
      int y, mx;
      x = in;
      out = new[d * oplane()];
      nsat = 0;
      for (int ch = 0; ch < d; ch++)
        for (int py = 0; py < oh(); py++)
          for (int px = 0; px < ow(); px++) begin
            if (lt == 1) begin
              y = pre(ch, 0, 0);
              if (y == 127 || y == -128) nsat++;
              out[ch] = y;
            end else begin
              mx = 0;
              for (int ph = 0; ph < hp; ph++)
                for (int pw = 0; pw < wp; pw++) begin
                  y = pre(ch, py * hp + ph, px * wp + pw);
                  if (y == 127 || y == -128) nsat++;
                  if (y > mx) mx = y;
                end
              out[ch * oplane() + py * ow() + px] = mx;
            end
          end
    endfunction
  endclass
endpackage
