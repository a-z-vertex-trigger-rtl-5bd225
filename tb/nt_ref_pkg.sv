`timescale 1ns/1ps
// nt_ref_pkg: reference model of the neural trigger for the testbenches.
//
// Written from the documented behaviour of the blocks, not from their code:
// the tanh table rule, the MLP equations with their weight order, the input
// scalings, the sector rules and the chain. It also defines the synthetic
// parameter memory contents: every sector record is generated from a hash of
// its address, so no data file is needed. Output-layer biases are drawn wider
// than the other weights so that the predicted z spreads over its range and
// every path of the chain (rejection in each step, z inside and outside the
// cut) is taken.
package nt_ref_pkg;
  import nt_pkg::*;

  // ------------------------------------------------------------ hash
  function automatic int unsigned hash32(input int unsigned a);
    int unsigned h;
    h = a * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return h;
  endfunction

  // ------------------------------------------------------------ tanh
  function automatic int ref_tanh(input longint acc);
    longint xi;
    int e;
    real c;
    if (acc >= 4 * 4096)      xi = 4 * 4096 - 1;
    else if (acc < -4 * 4096) xi = -4 * 4096;
    else                      xi = acc;
    e = int'((xi + 16384) / 32);     // 32 LSB per entry, 1024 entries
    c = (real'(e) * 32.0 + 16.0 - 16384.0) / 4096.0;
    return (c >= 0.0) ? int'($floor($tanh(c) * 4096.0 + 0.5)) : -int'($floor(-$tanh(c) * 4096.0 + 0.5));
  endfunction

  // ------------------------------------------------------------ MLP
  // w in the documented order, x and the result in 12-fraction-bit units.
  function automatic void ref_mlp(input int nin, input int nhid, input int nout,
                                  input int w[], input int x[], output int y[]);
    int h[];
    longint acc;
    int ob;
    h = new[nhid];
    y = new[nout];
    for (int j = 0; j < nhid; j++) begin
      acc = longint'(w[j*(nin+1)]) * 4096;
      for (int i = 0; i < nin; i++) acc += longint'(w[j*(nin+1)+i+1]) * longint'(x[i]);
      h[j] = ref_tanh(acc >>> 12);
    end
    ob = nhid * (nin + 1);
    for (int k = 0; k < nout; k++) begin
      acc = longint'(w[ob + k*(nhid+1)]) * 4096;
      for (int j = 0; j < nhid; j++) acc += longint'(w[ob + k*(nhid+1)+j+1]) * longint'(h[j]);
      y[k] = ref_tanh(acc >>> 12);
    end
  endfunction

  // ------------------------------------------------------------ memory image
  // Weight number n of an MLP with nin inputs, in record `rec`, MLP `which`.
  function automatic int gen_weight(input int rec, input int which, input int nin, input int n);
    int unsigned h;
    int ob;
    h  = hash32(rec * 8191 + which * 1000003 + n * 7 + 12345);
    ob = N_HID * (nin + 1);
    if (n >= ob && ((n - ob) % (N_HID + 1)) == 0)
      return int'(h % 20481) - 10240;      // output bias, +-2.5
    return int'(h % 1537) - 768;           // +-0.1875
  endfunction

  function automatic int gen_rel_id(input int rec, input int slot);
    int sl;
    if (slot == N_REL - 1 && (rec % 5) == 0) return 0;     // unused slot
    sl = slot % N_SL;
    return sl_base(sl) + 1 + ((slot * 37 + rec * 11) % SL_NTS[sl]);
  endfunction

  function automatic logic [MEM_W-1:0] mem_word(input longint unsigned addr);
    logic [MEM_W-1:0] wd;
    int rec, beat, nwt, nws;
    rec  = int'(addr / REC_BEATS);
    beat = int'(addr % REC_BEATS);
    nwt  = mlp_nw(N_IN_TOPO, N_HID, N_OUT);
    nws  = mlp_nw(N_IN_SL, N_HID, N_OUT);
    wd   = '0;
    for (int k = 0; k < WPB; k++) begin
      int v, n;
      v = 0;
      if (beat < REL_BEATS) begin
        n = beat * WPB + k;
        if (n < N_REL) v = gen_rel_id(rec, n);
      end else if (beat < REL_BEATS + TOPO_BEATS) begin
        n = (beat - REL_BEATS) * WPB + k;
        if (n < nwt) v = gen_weight(rec, 0, N_IN_TOPO, n);
      end else begin
        n = (beat - REL_BEATS - TOPO_BEATS) * WPB + k;
        if (n < nws) v = gen_weight(rec, 1, N_IN_SL, n);
      end
      wd[k*16 +: 16] = 16'(v);
    end
    return wd;
  endfunction

  // ------------------------------------------------------------ inputs
  function automatic int scale_dt(input int t);
    return (2 * t - 255) * 16;
  endfunction

  function automatic int corr_dt(input int t, input int et);
    return (t - et < 0) ? 0 : t - et;
  endfunction

  // Documented id scaling: local * round(8192*1024/(n-1)) >> 10, minus 4096.
  function automatic int scale_id(input int sl, input int local_id);
    int n, rc;
    n  = SL_NTS[sl];
    rc = (8192 * 1024 + (n - 1) / 2) / (n - 1);
    return ((local_id * rc) >>> 10) - 4096;
  endfunction

  function automatic void ref_topo(input int ids[], input bit hv[], input int ht[], input int et,
                                   output int x[]);
    x = new[ids.size()];
    foreach (ids[r]) x[r] = (ids[r] != 0 && hv[ids[r]]) ? scale_dt(corr_dt(ht[ids[r]], et)) : scale_dt(255);
  endfunction

  function automatic void ref_sl(input int ids[], input bit hv[], input int ht[], input int et,
                                 output int x[]);
    x = new[2 * N_SL];
    for (int s = 0; s < N_SL; s++) begin
      int bt, bid;
      bt = 256; bid = -1;
      foreach (ids[r]) begin
        if (ids[r] != 0 && ids[r] > sl_base(s) && ids[r] <= sl_base(s) + SL_NTS[s] && hv[ids[r]]) begin
          if (corr_dt(ht[ids[r]], et) < bt) begin
            bt  = corr_dt(ht[ids[r]], et);
            bid = ids[r];
          end
        end
      end
      x[2*s]   = (bid < 0) ? scale_dt(255) : scale_dt(bt);
      x[2*s+1] = (bid < 0) ? 0 : scale_id(s, bid - sl_base(s) - 1);
    end
  endfunction

  // ------------------------------------------------------------ sectors
  typedef struct {
    bit reject;
    int index;
    int th_center;
    int th_half;
    int z_half;
  } ref_sector_t;

  function automatic ref_sector_t ref_sector(input int step, input int phi, input int inv_pt,
                                             input int pz, input int pth, input int phi0);
    ref_sector_t s;
    int pb, ib, s2d, spacing, nth, kmax, best;
    real dbest;
    int zr [3] = '{800, 240, 128};
    int thh[3] = '{704, 244, 136};
    int nt [3] = '{1, 7, 13};
    int off[3] = '{0, 3600, 3600 * 8};
    pb  = ((phi - phi0) % 5760 + 5760) % 5760 / 16;
    ib  = inv_pt / 64;
    s.reject = (pb >= 180) || (ib >= 20) || (phi >= 5760);
    s2d = pb * 20 + ib;
    nth = nt[step];
    kmax = (nth - 1) / 2;
    best = 0;
    if (step > 0) begin
      spacing = thh[step];
      // nearest sector centre, ties to the higher one
      dbest = 1.0e9;
      for (int k = -kmax; k <= kmax; k++) begin
        real dd;
        dd = real'(pth - (1264 + k * spacing));
        if (dd < 0.0) dd = -dd;
        if (dd <= dbest) begin dbest = dd; best = k; end
      end
      if (pz > zr[step] || pz < -zr[step]) s.reject = 1;
    end
    s.index     = off[step] + s2d * nth + best + kmax;
    s.th_center = 1264 + best * ((step > 0) ? thh[step] : 0);
    s.th_half   = thh[step];
    s.z_half    = zr[step];
    return s;
  endfunction

  function automatic void ref_combine(input int yt[], input int ys[], input ref_sector_t s,
                                      output int z, output int th);
    int az, at;
    az = (yt[0] + ys[0]) >>> 1;
    at = (yt[1] + ys[1]) >>> 1;
    z  = (az * s.z_half) >>> 12;
    th = s.th_center + ((at * s.th_half) >>> 12);
  endfunction

  // Weights of one MLP of a record, from the memory image.
  function automatic void rec_weights(input int rec, input int which, output int w[]);
    int nin;
    nin = (which == 0) ? N_IN_TOPO : N_IN_SL;
    w = new[mlp_nw(nin, N_HID, N_OUT)];
    foreach (w[n]) w[n] = gen_weight(rec, which, nin, n);
  endfunction

  typedef struct {
    bit rejected;
    int last_step;
    bit z_trig;
    int z;
    int theta;
  } ref_result_t;

  // The whole chain for one track.
  function automatic ref_result_t ref_chain(input int phi, input int inv_pt, input bit hv[],
                                            input int ht[], input int et, input int phi0);
    ref_result_t r;
    int pz, pth;
    pz = 0; pth = 0;
    r.rejected = 0; r.z_trig = 0;
    for (int st = 0; st < 3; st++) begin
      ref_sector_t s;
      int ids[], xt[], xs[], wt[], ws[], yt[], ys[];
      s = ref_sector(st, phi, inv_pt, pz, pth, phi0);
      r.last_step = st;
      if (s.reject) begin
        r.rejected = 1; r.z = pz; r.theta = pth;
        return r;
      end
      ids = new[N_REL];
      foreach (ids[k]) ids[k] = gen_rel_id(s.index, k);
      ref_topo(ids, hv, ht, et, xt);
      ref_sl(ids, hv, ht, et, xs);
      rec_weights(s.index, 0, wt);
      rec_weights(s.index, 1, ws);
      ref_mlp(N_IN_TOPO, N_HID, N_OUT, wt, xt, yt);
      ref_mlp(N_IN_SL, N_HID, N_OUT, ws, xs, ys);
      ref_combine(yt, ys, s, pz, pth);
    end
    r.z = pz; r.theta = pth;
    r.z_trig = (pz <= 96) && (pz >= -96);
    return r;
  endfunction

endpackage
