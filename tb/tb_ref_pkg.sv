// tb_ref_pkg: reference model of the L-LUT network for the testbenches.
//
// It restates, from the written specification rather than from the RTL, how
// the network is defined: the 32-bit hash, the weight of every connection,
// the a priori random fan-in of every L-LUT, the hidden residual sub-network
// and the output quantizer. It evaluates the sub-network directly for each
// sample instead of reading a precomputed table, so a wrong table, a wrong
// address order or wrong wiring in the RTL shows up as a mismatch.
//
// Specification restated here:
//   hash(x): x ^= x>>16; x *= 0x7feb352d; x ^= x>>15; x *= 0x846ca68b; x ^= x>>16
//   weight(layer, lut, a, j, k) = low 4 bits of
//       hash(hash(hash(0x4E4C5554 ^ layer) ^ lut) ^ (a<<16 | j<<8 | k)) minus 8;
//       k = 32 gives the bias of output j of affine a.
//   affine a: out[j] = floor((bias + sum_k weight*in[k]) / 4)
//   fan-in slot k of L-LUT m in layer l: c = hash(hash(hash(0x53504152 ^ l) ^ m) ^ k) mod n_in,
//       then stepped by +1 (mod n_in) while it equals an earlier slot.
//   quantizer: clamp(floor(v / 4), 0, 2^beta - 1)
package tb_ref_pkg;

  localparam int BIAS_K = 32;

  function automatic int unsigned hash(input int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int weight(input int layer, input int lut, input int a,
                                input int j, input int k);
    int unsigned h;
    h = hash(hash(hash(32'h4E4C5554 ^ layer) ^ lut) ^ ((a << 16) | (j << 8) | k));
    return int'(h & 15) - 8;
  endfunction

  function automatic int floor_div4(input int v);
    // floor division by 4 written without shifts
    if (v >= 0) return v / 4;
    return -((-v + 3) / 4);
  endfunction

  // Fan-in indices of one L-LUT.
  function automatic void fanin(input int layer, input int lut, input int n_in,
                                input int f, ref int idx[]);
    int c;
    bit used;
    idx = new[f];
    for (int k = 0; k < f; k++) begin
      c = int'(hash(hash(hash(32'h53504152 ^ layer) ^ lut) ^ k) % n_in);
      // step past earlier slots; k+1 steps always suffice
      for (int t = 0; t <= k; t++) begin
        used = 0;
        for (int p = 0; p < k; p++) if (idx[p] == c) used = 1;
        if (used) c = (c + 1) % n_in;
      end
      idx[k] = c;
    end
  endfunction

  function automatic void apply_affine(input int layer, input int lut, input int a,
                                       input int in[], input int dout, ref int out[]);
    int s;
    out = new[dout];
    for (int j = 0; j < dout; j++) begin
      s = weight(layer, lut, a, j, BIAS_K);
      foreach (in[k]) s = s + weight(layer, lut, a, j, k) * in[k];
      out[j] = floor_div4(s);
    end
  endfunction

  // Output of one L-LUT for the given F input codes. Also reports whether the
  // skip connections changed the quantized result (for coverage).
  function automatic int llut_out(input int layer, input int lut, input int x[],
                                  input int beta_out, input int L, input int N,
                                  input int S, output bit skip_mattered);
    int u[], h[], r[], nos[];
    int chunks, per, a, dout, q, q_noskip, v_noskip;
    chunks = (S == 0) ? 1 : L / S;
    per    = (S == 0) ? L : S;
    u = x;
    a = 0;
    v_noskip = 0;
    for (int c = 0; c < chunks; c++) begin
      h = u;
      for (int s = 0; s < per; s++) begin
        dout = (a == L - 1) ? 1 : N;
        apply_affine(layer, lut, a, h, dout, h);
        if (s < per - 1) foreach (h[j]) if (h[j] < 0) h[j] = 0;
        a++;
      end
      nos = h;
      if (S != 0) begin
        apply_affine(layer, lut, L + c, u, h.size(), r);
        foreach (h[j]) h[j] = h[j] + r[j];
      end
      if (c < chunks - 1) foreach (h[j]) if (h[j] < 0) h[j] = 0;
      u = h;
    end
    v_noskip = nos[0];
    q        = floor_div4(u[0]);
    q_noskip = floor_div4(v_noskip);
    if (q < 0) q = 0;
    if (q > (1 << beta_out) - 1) q = (1 << beta_out) - 1;
    if (q_noskip < 0) q_noskip = 0;
    if (q_noskip > (1 << beta_out) - 1) q_noskip = (1 << beta_out) - 1;
    skip_mattered = (S != 0) && (q != q_noskip);
    return q;
  endfunction

  // Whole network: layer l has sizes[l] L-LUTs of fan-in fanins[l] and
  // betas[l]-bit outputs and reads the outputs of layer l-1 (the input for
  // l = 0). Returns the last layer's outputs and counts the L-LUT outputs
  // that the skip connections changed.
  function automatic void net_eval(input int x[], input int sizes[], input int fanins[],
                                   input int betas[], input int L, input int N, input int S,
                                   ref int y[], ref int skip_hits);
    int cur[], nxt[], idx[], xin[];
    bit sm;
    cur = x;
    foreach (sizes[l]) begin
      nxt = new[sizes[l]];
      for (int m = 0; m < sizes[l]; m++) begin
        fanin(l, m, cur.size(), fanins[l], idx);
        xin = new[fanins[l]];
        foreach (idx[k]) xin[k] = cur[idx[k]];
        nxt[m] = llut_out(l, m, xin, betas[l], L, N, S, sm);
        if (sm) skip_hits++;
      end
      cur = nxt;
    end
    y = cur;
  endfunction

endpackage
