// flan_ref_pkg: bit-exact reference model of the FLAN network for the
// testbenches, written from the arithmetic definitions and independent of
// the RTL structure (no lanes, groups or pipelines).
//
//   adder conv:  acc[wo][co] = -sum_{k,ci} |x[(wo*S+k)*CH_IN+ci]*1 - w[k][ci][co]*64|
//   batch norm:  y = sat32( floor(acc*scale / 1024) + shift*64 )
//   ReLU:        y = max(y, 0)
// Features are Q16.16 ints, parameters Q10.10 ints.  The class flan_params
// holds the geometry and a random parameter set of the whole network and can
// evaluate one histogram.
package flan_ref_pkg;

  localparam int NL = 11;   // layer ids 0..10, as flan_pkg::layer_e

  function automatic int sat32(longint v);
    if (v > 64'sd2147483647)  return 32'sh7FFF_FFFF;
    if (v < -64'sd2147483648) return 32'sh8000_0000;
    return int'(v);
  endfunction

  function automatic int ref_bn(longint x, int scale, int shift, bit bn, bit relu);
    longint v;
    int     y;
    v = bn ? ((x * longint'(scale)) >>> 10) + longint'(shift) * 64 : x;
    y = sat32(v);
    if (relu && y < 0) y = 0;
    return y;
  endfunction

  // one UAC layer; wt index ((co*ch_in + ci)*k + kk)
  function automatic void ref_layer(input int in_fm[], input int w_in, ch_in, ch_out, k, s,
                                    input int wt[], input int sc[], input int shf[],
                                    input bit bn, input bit relu, output int out_fm[]);
    int w_out = (w_in - k) / s + 1;
    out_fm = new[w_out * ch_out];
    for (int wo = 0; wo < w_out; wo++)
      for (int co = 0; co < ch_out; co++) begin
        longint acc = 0;
        for (int kk = 0; kk < k; kk++)
          for (int ci = 0; ci < ch_in; ci++) begin
            longint d = longint'(in_fm[(wo*s + kk)*ch_in + ci]) - longint'(wt[(co*ch_in + ci)*k + kk]) * 64;
            acc += (d < 0) ? -d : d;
          end
        out_fm[wo*ch_out + co] = ref_bn(-acc, sc[co], shf[co], bn, relu);
      end
  endfunction

  class flan_params;
    int n_bins;
    int ch_in [NL], ch_out [NL], k [NL], s [NL], w_in [NL];
    bit bn [NL], relu [NL];
    int wt [NL][];
    int sc [NL][];
    int shf [NL][];
    // intermediate results of the last run (for debugging and layer checks)
    int f_p1[], f_p2[], f_u[], f_a[], f_r[];

    function new(int nb = 256);
      int w1, w2;
      n_bins = nb;
      w1 = (nb - 13) / 5 + 1;
      w2 = (w1 - 9) / 3 + 1;
      set(0, 1, 5, 13, 5, nb, 1, 1);
      set(1, 5, 10, 9, 3, w1, 1, 1);
      set(2, 10, 10, 1, 1, w2, 1, 1);
      set(3, 10, 10, 1, 1, w2, 0, 1);
      set(4, 0, 10, 1, 1, w2, 1, 0);     // BN after the skip addition
      set(5, w2*10, 70, 1, 1, 1, 1, 1);
      set(6, 70, 30, 1, 1, 1, 1, 1);
      set(7, 30, 1, 1, 1, 1, 1, 1);
      set(8, w2*10, 70, 1, 1, 1, 1, 1);
      set(9, 70, 30, 1, 1, 1, 1, 1);
      set(10, 30, 1, 1, 1, 1, 1, 1);
    endfunction

    function void set(int l, int ci, int co, int kk, int ss, int wi, bit b, bit r);
      ch_in[l] = ci; ch_out[l] = co; k[l] = kk; s[l] = ss; w_in[l] = wi; bn[l] = b; relu[l] = r;
    endfunction

    static function int rnd(int lo, int hi);
      return lo + int'($urandom % (hi - lo + 1));
    endfunction

    // Random parameters of a plausible scale: weights in [-5, 60] (Q10.10),
    // scale about -1/(number of terms) so activations stay in range, shift
    // in [-20, 20] so ReLU both passes and clips.
    function void randomize_params();
      for (int l = 0; l < NL; l++) begin
        int terms = (ch_in[l] > 0) ? ch_in[l] * k[l] : 1;
        wt[l] = new[ch_out[l] * ch_in[l] * k[l]];
        sc[l] = new[ch_out[l]];
        shf[l] = new[ch_out[l]];
        foreach (wt[l][i]) wt[l][i] = rnd(-5*1024, 60*1024);
        foreach (sc[l][i]) begin
          sc[l][i] = -(1024 * rnd(30, 150)) / (100 * terms);
          if (sc[l][i] == 0) sc[l][i] = -1;
          if (rnd(0, 9) == 0) sc[l][i] = -sc[l][i];
          if (l == 4) sc[l][i] = rnd(300, 1500);
        end
        foreach (shf[l][i]) shf[l][i] = rnd(-20*1024, 20*1024);
      end
    endfunction

    // photon-count test of Algorithm 1: N_pc > T
    function bit foreground(int hist[], int threshold);
      longint npc = 0;
      foreach (hist[i]) npc += longint'(hist[i]);
      return npc > (longint'(threshold) <<< 16);
    endfunction

    function void run(input int hist[], input int threshold, output int tau_a, output int tau_i);
      int o1[], o2[], o3[];
      if (!foreground(hist, threshold)) begin
        tau_a = 0; tau_i = 0;
        return;
      end
      ref_layer(hist, w_in[0], ch_in[0], ch_out[0], k[0], s[0], wt[0], sc[0], shf[0], bn[0], relu[0], f_p1);
      ref_layer(f_p1, w_in[1], ch_in[1], ch_out[1], k[1], s[1], wt[1], sc[1], shf[1], bn[1], relu[1], f_p2);
      ref_layer(f_p2, w_in[2], ch_in[2], ch_out[2], k[2], s[2], wt[2], sc[2], shf[2], bn[2], relu[2], f_u);
      ref_layer(f_u, w_in[3], ch_in[3], ch_out[3], k[3], s[3], wt[3], sc[3], shf[3], bn[3], relu[3], f_a);
      f_r = new[f_p2.size()];
      foreach (f_r[i])
        f_r[i] = ref_bn(longint'(f_a[i]) + longint'(f_p2[i]), sc[4][i % 10], shf[4][i % 10], 1, 0);
      ref_layer(f_r, 1, ch_in[5], ch_out[5], 1, 1, wt[5], sc[5], shf[5], 1, 1, o1);
      ref_layer(o1, 1, ch_in[6], ch_out[6], 1, 1, wt[6], sc[6], shf[6], 1, 1, o2);
      ref_layer(o2, 1, ch_in[7], ch_out[7], 1, 1, wt[7], sc[7], shf[7], 1, 1, o3);
      tau_a = o3[0];
      ref_layer(f_r, 1, ch_in[8], ch_out[8], 1, 1, wt[8], sc[8], shf[8], 1, 1, o1);
      ref_layer(o1, 1, ch_in[9], ch_out[9], 1, 1, wt[9], sc[9], shf[9], 1, 1, o2);
      ref_layer(o2, 1, ch_in[10], ch_out[10], 1, 1, wt[10], sc[10], shf[10], 1, 1, o3);
      tau_i = o3[0];
    endfunction

    // a synthetic decay: Gaussian-ish rise at bin 14 then exponential fall,
    // scaled to `peak` photons, plus small random noise (counts, Q16.16)
    static function void make_hist(int nb, int peak, int tau_bins, output int hist[]);
      hist = new[nb];
      for (int i = 0; i < nb; i++) begin
        real v;
        if (i < 14) v = peak * $exp(-0.5 * (i - 14) * (i - 14) / 4.0);
        else        v = peak * $exp(-real'(i - 14) / real'(tau_bins));
        hist[i] = (int'(v) + rnd(0, 2)) * 65536;
      end
    endfunction
  endclass

endpackage
