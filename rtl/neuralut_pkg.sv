// neuralut_pkg: types, constants and constant functions shared by the L-LUT
// network.
//
// A NeuraLUT network is a circuit of logical lookup tables (L-LUTs). Every
// L-LUT reads F low-precision activations, each BETA bits wide, from the
// layer before it and returns one BETA-bit activation. Inside, the L-LUT is
// nothing but a ROM of 2^(BETA*F) words. The words are the quantized outputs
// of a small dense residual network (the "hidden sub-network"), evaluated on
// every possible input combination when the ROM is built. The hardware never
// computes the sub-network; it only stores its truth table.
//
// This package holds what is needed to build those tables and the sparse
// wiring between layers:
//   * mix32          - a 32-bit integer hash, the source of every pseudo-random
//                      number in the design (weights and connectivity).
//   * fanin_select   - the a priori random sparse connectivity: which F
//                      outputs of the previous layer feed a given L-LUT.
//   * subnet_weights - the weights and biases of one hidden sub-network.
//   * subnet_eval    - the sub-network function f_N (chunks of S affine
//                      layers with ReLU between them and an affine skip
//                      connection around each chunk).
//   * quantize       - the output quantizer of an L-LUT.
//
// Follows the paper: the sub-network structure (input width F, L affine
// layers, hidden width N, one output, ReLU, residual affine R_i around every
// S layers, S = 0 meaning no skip), the ROM size 2^(BETA*F), the random
// fan-in selection. This design's own choices: the trained weights are not
// published, so weights are small integers in [-8, 7] drawn from mix32 with a
// fixed seed; arithmetic is integer, each affine result is shifted right by
// AFF_SHIFT; the quantizer is an unsigned clamp after a shift by Q_SHIFT.
// With the weights of a trained model in place of subnet_weights the rest of
// the design is unchanged.
package neuralut_pkg;

  // Largest sub-network supported by the fixed-size weight arrays.
  localparam int MAX_F   = 8;   // L-LUT fan-in
  localparam int MAX_N   = 32;  // hidden width of the sub-network
  localparam int MAX_L   = 8;   // depth of the sub-network
  localparam int MAX_W   = (MAX_F > MAX_N) ? MAX_F : MAX_N;
  localparam int MAX_AFF = 2 * MAX_L;  // L main affines + up to L skip affines

  // Fixed-point scaling of the integer sub-network.
  localparam int AFF_SHIFT = 2;  // every affine output is (sum) >>> AFF_SHIFT
  localparam int Q_SHIFT   = 2;  // quantizer: clamp(v >>> Q_SHIFT, 0, 2^BETA-1)

  localparam int unsigned WEIGHT_SEED = 32'h4E4C5554;
  localparam int unsigned CONN_SEED   = 32'h53504152;

  // Topology of the hidden sub-network, the same for every L-LUT.
  typedef struct packed {
    int unsigned depth;  // L: number of affine layers
    int unsigned width;  // N: width of the hidden layers
    int unsigned skip;   // S: layers spanned by one skip connection, 0 = none
  } subnet_cfg_t;

  // Weights of one sub-network. Affine a (0..L-1 main, L.. skip) maps
  // vector v to out[j] = (sum_k w[a][j][k] * v[k] + w[a][j][MAX_W]) >>> AFF_SHIFT.
  typedef int subnet_weights_t [MAX_AFF][MAX_W][MAX_W+1];
  typedef int vec_t [MAX_W];
  typedef int fanin_t [MAX_F];
  typedef logic [$clog2(MAX_AFF)-1:0] aff_idx_t;  // selects one affine map

  // 32-bit avalanche hash (xorshift-multiply).
  function automatic int unsigned mix32(input int unsigned x);
    int unsigned h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB352D;
    h = h ^ (h >> 15);
    h = h * 32'h846CA68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Indices of the F previous-layer outputs read by L-LUT `lut` of layer
  // `layer`. Each index is hashed; a collision is resolved by stepping to
  // the next free index, so the F indices are distinct when n_in >= F.
  function automatic fanin_t fanin_select(input int layer, input int lut,
                                          input int n_in, input int f);
    fanin_t      idx;
    int unsigned h;
    int          c;
    bit          clash;
    idx = '{default: 0};
    for (int k = 0; k < MAX_F; k++) begin
      if (k < f) begin
        h = mix32(mix32(mix32(CONN_SEED ^ int'(layer)) ^ int'(lut)) ^ int'(k));
        c = int'(h % int'(n_in));
        for (int t = 0; t < MAX_F; t++) begin
          clash = 1'b0;
          for (int p = 0; p < MAX_F; p++)
            if (p < k && idx[p] == c) clash = 1'b1;
          if (clash) c = (c + 1) % n_in;
        end
        idx[k] = c;
      end
    end
    return idx;
  endfunction

  // Weight or bias in [-8, 7] for affine `aff`, output `j`, input `k`
  // (k = MAX_W selects the bias).
  function automatic int weight_of(input int layer, input int lut, input int aff,
                                   input int j, input int k);
    int unsigned h;
    h = mix32(WEIGHT_SEED ^ int'(layer));
    h = mix32(h ^ int'(lut));
    h = mix32(h ^ int'((aff << 16) | (j << 8) | k));
    return int'(h[3:0]) - 8;
  endfunction

  function automatic subnet_weights_t subnet_weights(input int layer, input int lut,
                                                     input int f, input subnet_cfg_t cfg);
    subnet_weights_t w;
    int              n_aff;
    // L main affines, plus L/S skip affines when S > 0.
    n_aff = int'(cfg.depth) + ((cfg.skip == 0) ? 0 : int'(cfg.depth / cfg.skip));
    w = '{default: 0};
    for (int a = 0; a < MAX_AFF; a++)
      for (int j = 0; j < MAX_W; j++)
        for (int k = 0; k <= MAX_W; k++)
          if (a < n_aff && (k < f || k < int'(cfg.width) || k == MAX_W))
            w[a][j][k] = weight_of(layer, lut, a, j, k);
    return w;
  endfunction

  // Width of the vector after main affine layer `i` (0-based).
  function automatic int layer_width(input int i, input int depth, input int width);
    if (i == depth - 1) return 1;
    return width;
  endfunction

  // out = (W * v + b) >>> AFF_SHIFT, for din inputs and dout outputs.
  function automatic vec_t affine(input subnet_weights_t w, input aff_idx_t a, input vec_t v,
                                  input int din, input int dout);
    vec_t o;
    int   s;
    o = '{default: 0};
    for (int j = 0; j < dout; j++) begin
      s = w[a][j][MAX_W];
      for (int k = 0; k < din; k++) s += w[a][j][k] * v[k];
      o[j] = s >>> AFF_SHIFT;
    end
    return o;
  endfunction

  function automatic vec_t relu(input vec_t v);
    vec_t o;
    for (int j = 0; j < MAX_W; j++) o[j] = (v[j] > 0) ? v[j] : 0;
    return o;
  endfunction

  // f_N(x): the hidden sub-network before the output quantizer.
  // With S > 0 the L affines form L/S chunks F_i = Fhat_i + R_i, with ReLU
  // inside a chunk and between chunks, none after the last. With S = 0 it is
  // a plain MLP of L affines with ReLU between them.
  function automatic int subnet_eval(input subnet_weights_t w, input vec_t x,
                                     input int f, input subnet_cfg_t cfg);
    vec_t u, h, r;
    int   du, dh, chunks, per_chunk, li;
    chunks    = (cfg.skip == 0) ? 1 : int'(cfg.depth / cfg.skip);
    per_chunk = (cfg.skip == 0) ? int'(cfg.depth) : int'(cfg.skip);
    u  = x;
    du = f;
    li = 0;
    for (int c = 0; c < chunks; c++) begin
      h  = u;
      dh = du;
      for (int s = 0; s < per_chunk; s++) begin
        h  = affine(w, aff_idx_t'(li), h, dh, layer_width(li, int'(cfg.depth), int'(cfg.width)));
        dh = layer_width(li, int'(cfg.depth), int'(cfg.width));
        if (s != per_chunk - 1) h = relu(h);
        li++;
      end
      if (cfg.skip != 0) begin
        r = affine(w, aff_idx_t'(int'(cfg.depth) + c), u, du, dh);
        for (int j = 0; j < dh; j++) h[j] += r[j];
      end
      if (c != chunks - 1) h = relu(h);
      u  = h;
      du = dh;
    end
    return u[0];
  endfunction

  // Unsigned output quantizer of an L-LUT.
  function automatic int quantize(input int v, input int beta);
    int q;
    q = v >>> Q_SHIFT;
    if (q < 0) q = 0;
    if (q > (1 << beta) - 1) q = (1 << beta) - 1;
    return q;
  endfunction

endpackage
