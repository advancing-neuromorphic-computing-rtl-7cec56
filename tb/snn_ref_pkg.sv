// snn_ref_pkg: reference model of the spiking datapath for the testbenches.
//
// Plain integer arithmetic, written from the behaviour the RTL headers describe and
// not from the RTL: effective weight at a precision, the spike encoder, one LIF
// update, and whole convolution / linear / BCU / FCU inferences on int arrays.
package snn_ref_pkg;

  function automatic int weff(int w, int prec);
    int w8 = ((w & 255) ^ 128) - 128;
    case (prec)
      0: return (w8 < 0) ? -1 : 1;
      1: return ((w8 & 3) ^ 2) - 2;
      2: return ((w8 & 15) ^ 8) - 8;
      default: return w8;
    endcase
  endfunction

  // spike of value x (0..255) at step t of T, rate (code 0) or latency (code 1)
  function automatic bit enc(int x, int t, int T, int code);
    if (code == 0) return ((t + 1) * x / 256) != (t * x / 256);
    return (x != 0) && (((255 - x) * T / 256) == t);
  endfunction

  function automatic int sat(longint v, int bits);
    longint mx = (longint'(1) << (bits - 1)) - 1;
    longint mn = -(longint'(1) << (bits - 1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  // floor division by 2^s for negative numbers too (arithmetic shift)
  function automatic longint ashr(longint v, int s);
    longint p = longint'(1) << s;
    if (v >= 0) return v / p;
    return -((-v + p - 1) / p);
  endfunction

  // one LIF update; returns spike, updates v and r
  function automatic bit lif(inout int v, inout int r, input int cur,
                             input int vth, input int vrest, input int ls, input int tref);
    longint vi;
    int vs;
    if (r != 0) begin
      v = vrest; r = r - 1; return 0;
    end
    vi = longint'(v) + longint'(cur);
    if (ls != 0) vi = vi - ashr(longint'(v) - longint'(vrest), ls);
    vs = sat(vi, 16);
    if (vs >= vth) begin
      v = vrest; r = tref; return 1;
    end
    v = vs; r = 0; return 0;
  endfunction

  // LIF threshold parameters of the reference
  typedef struct {
    int vth, vrest, ls, tref;
  } lifp_t;

  // one time step of a convolutional LIF layer (stride 1, no padding)
  function automatic void conv_step(input int img[], input int IC, input int IH, input int IW,
                                    input int OC, input int K, input int wt[], input int bs[],
                                    input int t, input int T, input int code, input int prec,
                                    input lifp_t p, input bit first,
                                    inout int vm[], inout int rm[], output int sp[]);
    int OH = IH - K + 1, OW = IW - K + 1, KK = IC * K * K;
    int v, r;
    if (first) begin
      vm = new[OC * OH * OW];
      rm = new[OC * OH * OW];
      foreach (vm[n]) begin vm[n] = p.vrest; rm[n] = 0; end
    end
    sp = new[OC * OH * OW];
    for (int c = 0; c < OC; c++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++) begin
          int n, cur;
          n = c * OH * OW + y * OW + x;
          cur = bs[c];
          for (int i = 0; i < IC; i++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                if (enc(img[i * IH * IW + (y + ky) * IW + x + kx], t, T, code))
                  cur += weff(wt[c * KK + i * K * K + ky * K + kx], prec);
          v = vm[n]; r = rm[n];
          sp[n] = lif(v, r, cur, p.vth, p.vrest, p.ls, p.tref);
          vm[n] = v; rm[n] = r;
        end
  endfunction

  // whole BCU inference: per-channel spike counts and the winning channel
  function automatic int bcu_infer(input int img[], input int IH, input int IW, input int OC,
                                   input int K, input int wt[], input int bs[], input int T,
                                   input int code, input int prec, input lifp_t p,
                                   output int cnt[]);
    int vm[], rm[], sp[];
    int OH = IH - K + 1, OW = IW - K + 1, best;
    cnt = new[OC];
    foreach (cnt[c]) cnt[c] = 0;
    for (int t = 0; t < T; t++) begin
      conv_step(img, 1, IH, IW, OC, K, wt, bs, t, T, code, prec, p, t == 0, vm, rm, sp);
      foreach (sp[n]) cnt[n / (OH * OW)] += sp[n];
    end
    best = 0;
    for (int c = 1; c < OC; c++) if (cnt[c] > cnt[best]) best = c;
    return best;
  endfunction

  // whole FCU inference: class scores (summed linear outputs) and the winning class
  // One step of a convolutional LIF layer whose input is already a spike map (0/1).
  // Weights are read from wt[woff...] and biases from bs[boff...].
  function automatic void conv_step_sp(input int sp_in[], input int IC, input int IH,
                                       input int IW, input int OC, input int K,
                                       input int wt[], input int woff, input int bs[],
                                       input int boff, input int prec, input lifp_t p,
                                       input bit first,
                                       inout int vm[], inout int rm[], output int sp[]);
    int OH = IH - K + 1, OW = IW - K + 1, KK = IC * K * K;
    int v, r;
    if (first) begin
      vm = new[OC * OH * OW];
      rm = new[OC * OH * OW];
      foreach (vm[n]) begin vm[n] = p.vrest; rm[n] = 0; end
    end
    sp = new[OC * OH * OW];
    for (int c = 0; c < OC; c++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++) begin
          int n, cur;
          n = c * OH * OW + y * OW + x;
          cur = bs[boff + c];
          for (int i = 0; i < IC; i++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                if (sp_in[i * IH * IW + (y + ky) * IW + x + kx] != 0)
                  cur += weff(wt[woff + c * KK + i * K * K + ky * K + kx], prec);
          v = vm[n]; r = rm[n];
          sp[n] = lif(v, r, cur, p.vth, p.vrest, p.ls, p.tref);
          vm[n] = v; rm[n] = r;
        end
  endfunction

  // FCU inference: conv+LIF (OC channels), conv+LIF (OC2 channels), linear layer whose
  // outputs are summed over the steps. cw/cb hold layer 1's weights/biases followed by
  // layer 2's. total_spikes counts the spikes of both convolutional layers.
  function automatic int fcu_infer(input int img[], input int IC, input int IH, input int IW,
                                   input int OC, input int OC2, input int K, input int NCL,
                                   input int cw[], input int cb[], input int lw[], input int lb[],
                                   input int T, input int code, input int prec, input lifp_t p,
                                   output longint sc[], output int total_spikes);
    int vm[], rm[], sp1[], vm2[], rm2[], sp[];
    int nf, best, oh, ow;
    oh = IH - K + 1; ow = IW - K + 1;
    nf = OC2 * (oh - K + 1) * (ow - K + 1);
    sc = new[NCL];
    total_spikes = 0;
    for (int t = 0; t < T; t++) begin
      conv_step(img, IC, IH, IW, OC, K, cw, cb, t, T, code, prec, p, t == 0, vm, rm, sp1);
      conv_step_sp(sp1, OC, oh, ow, OC2, K, cw, OC * IC * K * K, cb, OC, prec, p, t == 0,
                   vm2, rm2, sp);
      foreach (sp1[n]) total_spikes += sp1[n];
      foreach (sp[n]) total_spikes += sp[n];
      for (int o = 0; o < NCL; o++) begin
        longint s;
        s = lb[o];
        for (int i = 0; i < nf; i++) if (sp[i] != 0) s += weff(lw[o * nf + i], prec);
        sc[o] = (t == 0) ? s : sc[o] + s;
      end
    end
    best = 0;
    for (int o = 1; o < NCL; o++) if (sc[o] > sc[best]) best = o;
    return best;
  endfunction

endpackage
