// Behavioural reference model of the spiking-transformer detector, used by
// the testbenches to compute expected outputs independently of the RTL.
//
// It evaluates the detector's equations directly, one neuron and one token
// at a time, with dense matrix-vector sums (every input is visited, spiking
// or not), plain integers and no notion of cycles.  Only the random numbers
// are shared with the RTL by convention: a 32-bit xorshift (13, 17, 5) per
// generator lane, seeded base + (lane+1)*0x9E3779B9 with bit 0 forced to 1,
// advanced once per encoded token (encoder) or per attention row (MSSA), and
// a Bernoulli draw of c/n that is 1 when ((r & 0xFFFF) * n) >> 16 < c.
package snn_ref_pkg;

  function automatic int unsigned xs32(int unsigned s);
    s ^= s << 13;
    s ^= s >> 17;
    s ^= s << 5;
    return s;
  endfunction

  function automatic int unsigned seed_of(int unsigned base, int lane);
    return (base + (lane + 1) * 32'h9E3779B9) | 1;
  endfunction

  function automatic int urand(int unsigned r, int n);
    longint p;
    p = longint'(r & 32'hFFFF) * longint'(n);
    return int'(p >> 16);
  endfunction

  // A layer of LIF neurons over M tokens; membranes persist across steps.
  class lif_ref;
    int nin, nout, m, vth, leak, vw;
    int w[];      // w[o*nin + i]
    int v[];      // v[tok*nout + o]
    longint fires, skips, leaks;
    function new(int nin_, int nout_, int m_, int vth_, int leak_, int vw_);
      nin = nin_; nout = nout_; m = m_; vth = vth_; leak = leak_; vw = vw_;
      w = new[nin * nout];
      v = new[m * nout];
      fires = 0; skips = 0; leaks = 0;
    endfunction
    function void clear();
      foreach (v[i]) v[i] = 0;
    endfunction
    // x[tok*nin + i] -> y[tok*nout + o]
    function void step(input bit x[], output bit y[]);
      y = new[m * nout];
      for (int tk = 0; tk < m; tk++) begin
        for (int i = 0; i < nin; i++) if (!x[tk*nin + i]) skips++;
        for (int o = 0; o < nout; o++) begin
          int cur, vp, vs;
          cur = 0;
          for (int i = 0; i < nin; i++) cur += x[tk*nin + i] ? w[o*nin + i] : 0;
          vp = v[tk*nout + o];
          if (leak > 0) begin
            if ((vp >>> leak) != 0) leaks++;
            vp = vp - (vp >>> leak);
          end
          vs = vp + cur;
          if (vs >= vth) begin
            y[tk*nout + o] = 1;
            v[tk*nout + o] = 0;
            fires++;
          end else begin
            y[tk*nout + o] = 0;
            v[tk*nout + o] = (vs < -(1 << (vw - 1))) ? -(1 << (vw - 1)) : vs;
          end
        end
      end
    endfunction
  endclass

  // Masked stochastic spiking attention over all heads.
  class mssa_ref;
    int m, dk, nh;
    int unsigned base;
    int unsigned lane[];
    longint masked;     // (m, m') pairs with Q AND K non-zero removed by the mask
    function new(int m_, int dk_, int nh_, int unsigned base_);
      m = m_; dk = dk_; nh = nh_; base = base_;
      lane = new[m + dk];
      masked = 0;
      reseed();
    endfunction
    function void reseed();
      foreach (lane[i]) lane[i] = seed_of(base, i);
    endfunction
    // q/k/v/g indexed [tok*(nh*dk) + h*dk + d]
    function void step(input bit q[], input bit k[], input bit v[], output bit g[]);
      int de;
      bit a[];
      de = nh * dk;
      g = new[m * de];
      a = new[m];
      for (int h = 0; h < nh; h++) begin
        for (int mq = 0; mq < m; mq++) begin
          for (int mk = 0; mk < m; mk++) begin
            int c;
            c = 0;
            for (int d = 0; d < dk; d++) c += (q[mq*de + h*dk + d] && k[mk*de + h*dk + d]) ? 1 : 0;
            if (mk > mq) begin
              if (c != 0) masked++;
              c = 0;
            end
            a[mk] = urand(lane[mk], dk) < c;
          end
          for (int d = 0; d < dk; d++) begin
            int c;
            c = 0;
            for (int mk = 0; mk < m; mk++) c += (a[mk] && v[mk*de + h*dk + d]) ? 1 : 0;
            g[mq*de + h*dk + d] = urand(lane[m + d], m) < c;
          end
          foreach (lane[i]) lane[i] = xs32(lane[i]);
        end
      end
    endfunction
  endclass

  // One decoder layer.
  class dec_ref;
    lif_ref q, k, v, f1, f2;
    mssa_ref att;
    function new(int m, int de, int dh, int nh, int vth, int leak, int vw, int unsigned seed);
      q  = new(de, de, m, vth, leak, vw);
      k  = new(de, de, m, vth, leak, vw);
      v  = new(de, de, m, vth, leak, vw);
      f1 = new(de, dh, m, vth, leak, vw);
      f2 = new(dh, de, m, vth, leak, vw);
      att = new(m, de / nh, nh, seed);
    endfunction
    function void clear();
      q.clear(); k.clear(); v.clear(); f1.clear(); f2.clear(); att.reseed();
    endfunction
    function void step(input bit e_in[], output bit e_out[]);
      bit qs[], ks[], vs[], gs[], hs[];
      q.step(e_in, qs);
      k.step(e_in, ks);
      v.step(e_in, vs);
      att.step(qs, ks, vs, gs);
      f1.step(gs, hs);
      f2.step(hs, e_out);
    endfunction
    function longint fires();
      return q.fires + k.fires + v.fires + f1.fires + f2.fires;
    endfunction
    function longint skips();
      return q.skips + k.skips + v.skips + f1.skips + f2.skips;
    endfunction
    function longint leaks();
      return q.leaks + k.leaks + v.leaks + f1.leaks + f2.leaks;
    endfunction
  endclass

  // Whole detector: encoder, embedding, decoder layers, output layer.
  class model_ref;
    int m, dt, de, nclass, t_steps, nlayers, pw;
    int unsigned enc_base;
    int prob[];          // prob[tok*dt + d], probability * 2^pw
    int wo[];            // wo[c*de + i]
    lif_ref emb;
    dec_ref dec[];
    longint score[];     // score[tok*nclass + c]
    longint pad_zero;    // encoder entries that were zero padding
    function new(int m_, int dt_, int de_, int dh, int nl, int nh, int nclass_, int t_,
                 int vth, int leak, int vw, int pw_, int unsigned enc_base_,
                 int unsigned layer_base, int unsigned layer_step);
      m = m_; dt = dt_; de = de_; nclass = nclass_; t_steps = t_; nlayers = nl; pw = pw_;
      enc_base = enc_base_;
      prob = new[m * dt];
      wo = new[nclass * de];
      emb = new(dt, de, m, vth, leak, vw);
      dec = new[nl];
      for (int l = 0; l < nl; l++)
        dec[l] = new(m, de, dh, nh, vth, leak, vw, layer_base + l * layer_step);
      score = new[m * nclass];
      pad_zero = 0;
    endfunction
    function void run();
      int unsigned lane[];
      bit x[], e[], e2[];
      lane = new[dt];
      foreach (lane[i]) lane[i] = seed_of(enc_base, i);
      emb.clear();
      foreach (dec[l]) dec[l].clear();
      foreach (score[i]) score[i] = 0;
      for (int t = 0; t < t_steps; t++) begin
        x = new[m * dt];
        for (int tk = 0; tk < m; tk++)
          for (int d = 0; d < dt; d++) begin
            x[tk*dt + d] = int'(lane[d] & ((1 << pw) - 1)) < prob[tk*dt + d];
            if (prob[tk*dt + d] == 0) pad_zero++;
            lane[d] = xs32(lane[d]);
          end
        emb.step(x, e);
        for (int l = 0; l < nlayers; l++) begin
          dec[l].step(e, e2);
          e = e2;
        end
        for (int tk = 0; tk < m; tk++)
          for (int c = 0; c < nclass; c++)
            for (int i = 0; i < de; i++)
              if (e[tk*de + i]) score[tk*nclass + c] += wo[c*de + i];
      end
    endfunction
    function int answer();
      int best;
      best = 0;
      for (int c = 1; c < nclass; c++)
        if (score[(m-1)*nclass + c] > score[(m-1)*nclass + best]) best = c;
      return best;
    endfunction
  endclass

endpackage
