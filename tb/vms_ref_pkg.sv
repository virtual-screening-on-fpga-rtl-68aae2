// vms_ref_pkg: test data and a bit-exact reference model of the prediction
// flow, written independently of the RTL, for the testbenches.
//
// Model and compound values are not stored: each entry is a hash of its
// indices and a seed, so any testbench can regenerate the same beta link
// matrix, target representation and fingerprints, and the reference can be
// computed straight from the definition:
//   latent[c][s][l] = sat16( (sum_f feat[c][f] * beta[s][f][l]) >>> lat_shift )
//   pred[c][t]      = sat16( (sum_s sum_l latent[c][s][l] * tgt[s][l][t])
//                            >>> (log2(S) + pred_shift) )
package vms_ref_pkg;
  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c, int unsigned d);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ (b + 32'h1234567) * 32'h85EBCA77 ^ (c + 32'h89ABCDE) * 32'hC2B2AE3D ^ (d + 32'h5A5A5A5) * 32'h27D4EB2F;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  // signed value uniformly in [-amp, amp-1]
  function automatic int sval(int unsigned h, int amp);
    return int'(h % (2 * amp)) - amp;
  endfunction

  function automatic int feat(int seed, int c, int f, int amp);
    return sval(mix(seed, 1, c, f), amp);
  endfunction
  function automatic int beta(int seed, int s, int f, int l, int amp);
    return sval(mix(seed, 2, s * 65536 + f, l), amp);
  endfunction
  function automatic int tgt(int seed, int s, int l, int t, int amp);
    return sval(mix(seed, 3, s * 65536 + l, t), amp);
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int ref_latent(int seed, int c, int s, int l, int nf,
                                    int famp, int bamp, int lat_shift);
    longint acc = 0;
    for (int f = 0; f < nf; f++)
      acc += longint'(feat(seed, c, f, famp)) * longint'(beta(seed, s, f, l, bamp));
    return sat16(acc >>> lat_shift);
  endfunction

  // one 512-bit beat of compound c's fingerprint (32 features of 16 bits)
  function automatic logic [511:0] feat_beat(int seed, int c, int b, int famp);
    logic [511:0] w;
    for (int k = 0; k < 32; k++) w[k*16 +: 16] = 16'(feat(seed, c, b * 32 + k, famp));
    return w;
  endfunction

  // 512-bit slice `chunk` of beta word (s, b): entry (k, l) at byte k*nl + l
  function automatic logic [511:0] beta_chunk(int seed, int s, int b, int chunk, int nl, int bamp);
    logic [511:0] w;
    for (int e = 0; e < 64; e++) begin
      int idx = chunk * 64 + e;
      int k   = idx / nl;
      int l   = idx % nl;
      w[e*8 +: 8] = 8'(beta(seed, s, b * 32 + k, l, bamp));
    end
    return w;
  endfunction

  // target word (s, t): entry l at byte l, zero above nl
  function automatic logic [511:0] tgt_word(int seed, int s, int t, int nl, int tamp);
    logic [511:0] w = '0;
    for (int l = 0; l < nl; l++) w[l*8 +: 8] = 8'(tgt(seed, s, l, t, tamp));
    return w;
  endfunction

  // all predictions of compound c; latents computed once per sample
  function automatic void ref_predictions(int seed, int c, int nf, int nl, int ns, int nt,
                                          int famp, int bamp, int tamp,
                                          int lat_shift, int pred_shift,
                                          ref int pred[], ref int sat_count);
    longint sum[];
    int     lat[];
    int     div_shift = $clog2(ns);
    sum  = new[nt];
    lat  = new[nl];
    pred = new[nt];
    foreach (sum[t]) sum[t] = 0;
    for (int s = 0; s < ns; s++) begin
      for (int l = 0; l < nl; l++) begin
        lat[l] = ref_latent(seed, c, s, l, nf, famp, bamp, lat_shift);
        if (lat[l] == 32767 || lat[l] == -32768) sat_count++;
      end
      for (int t = 0; t < nt; t++)
        for (int l = 0; l < nl; l++)
          sum[t] += longint'(lat[l]) * longint'(tgt(seed, s, l, t, tamp));
    end
    for (int t = 0; t < nt; t++) begin
      pred[t] = sat16(sum[t] >>> (div_shift + pred_shift));
      if (pred[t] == 32767 || pred[t] == -32768) sat_count++;
    end
  endfunction
endpackage
