// tb_ref_pkg: reference models used by the testbenches.
//
// Independent software versions of the accelerator's arithmetic, written
// with plain integers (longint) rather than the RTL's typed, width-limited
// signals: the placeholder ROM formula, the requantization (computed with
// floor division instead of a shift), one linear layer, the ReLU and the
// complete 3-H-1 network.
package tb_ref_pkg;

  // Same formula as the ROM placeholder contents: 32-bit hash of
  // (index, seed), low `bits` bits taken as a two's complement number.
  function automatic int unsigned ref_hash(int unsigned idx, int unsigned seed);
    longint unsigned h;
    h = (longint'(idx) * 64'h9E37_79B1 + longint'(seed) * 64'h85EB_CA77 + 64'h1234_5678) % (64'd1 << 32);
    h = h ^ (h >> 15);
    h = (h * 64'h2C1B_3C6D) % (64'd1 << 32);
    h = h ^ (h >> 12);
    h = (h * 64'h297A_2D39) % (64'd1 << 32);
    h = h ^ (h >> 15);
    return int'(h);
  endfunction

  function automatic longint ref_word(int unsigned idx, int unsigned seed, int unsigned bits);
    longint unsigned v;
    longint          m;
    v = longint'(ref_hash(idx, seed)) & ((64'd1 << bits) - 1);
    m = longint'(v);
    if (v >= (64'd1 << (bits - 1))) m = m - (64'sd1 <<< bits);
    return m;
  endfunction

  // floor(a / 2^n) for any sign of a.
  function automatic longint floor_div_pow2(longint a, int n);
    longint d;
    d = 64'sd1 <<< n;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int clamp8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int ref_requant(longint sum, longint m0, int n, longint zy);
    return clamp8(floor_div_pow2(sum * m0, n) + zy);
  endfunction

  // True if the requantization before clamping left the 8-bit range.
  function automatic bit ref_saturates(longint sum, longint m0, int n, longint zy);
    longint v;
    v = floor_div_pow2(sum * m0, n) + zy;
    return (v > 127) || (v < -128);
  endfunction

  function automatic int ref_relu(int v, int za);
    return (v < za) ? za : v;
  endfunction

  // Accumulator of neuron j of a layer with placeholder ROM contents.
  function automatic longint ref_neuron_sum(int x[], int k, int j, longint zx, longint zw,
                                            int unsigned wseed, int unsigned bseed, int unsigned bbits);
    longint s;
    s = ref_word(j, bseed, bbits);
    for (int i = 0; i < k; i++) begin
      s += (longint'(x[i]) - zx) * (ref_word(j * k + i, wseed, 8) - zw);
    end
    return s;
  endfunction

  typedef struct {
    int  y;
    int  relu_clamped;   // hidden activations raised to Z_A1 by the ReLU
    int  relu_passed;    // hidden activations passed unchanged
    int  saturated;      // requantized values clamped to the 8-bit range
  } mlp_result_t;

  // Whole network with the placeholder seeds the top level uses
  // (hidden: 11/12, output: 21/22, 14-bit biases).
  function automatic mlp_result_t ref_mlp(int x[], int h, longint zx, longint zw1, int za1, longint m01,
                                          int n1, longint zw2, longint zy, longint m02, int n2);
    mlp_result_t r;
    int a[];
    longint s;
    r = '{default: 0};
    a = new[h];
    for (int j = 0; j < h; j++) begin
      s = ref_neuron_sum(x, 3, j, zx, zw1, 11, 12, 14);
      if (ref_saturates(s, m01, n1, za1)) r.saturated++;
      a[j] = ref_requant(s, m01, n1, za1);
      if (a[j] < za1) r.relu_clamped++; else r.relu_passed++;
      a[j] = ref_relu(a[j], za1);
    end
    s = ref_neuron_sum(a, h, 0, za1, zw2, 21, 22, 14);
    if (ref_saturates(s, m02, n2, zy)) r.saturated++;
    r.y = ref_requant(s, m02, n2, zy);
    return r;
  endfunction

endpackage
