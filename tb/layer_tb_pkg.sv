// layer_tb_pkg: test data and an independent integer reference model of the
// Transformer layer, shared by the layer testbenches.
//
// All tensors are defined by hash functions of their indices, so the
// off-chip memory model and the reference model agree without any data
// file. The reference re-implements each operator's arithmetic
// (requantisation, exp2 polynomial softmax, integer LayerNorm, polynomial
// GeLU) with plain loops over whole matrices, independently of the RTL's
// streaming structure, so an output must match bit for bit.
package layer_tb_pkg;

  function automatic int hash3(input int a, input int b, input int c);
    int unsigned h;
    h = 32'h9e3779b9 ^ (a * 32'h85ebca6b) ^ (b * 32'hc2b2ae35) ^ (c * 32'h27d4eb2f);
    h ^= h >> 15; h *= 32'h2c1b3c6d; h ^= h >> 12; h *= 32'h297a2d39; h ^= h >> 15;
    return int'(h & 32'h7fffffff);
  endfunction

  // layer input X[t][f], int8 in [-64, 63]
  function automatic int xval(input int t, input int f);
    return (hash3(1, t, f) % 128) - 64;
  endfunction
  // weight of GEMM gi (0 q, 1 k, 2 v, 3 p, 4 f1, 5 f2) at [k][n], a signed
  // integer of the given width (int4 by default)
  function automatic int wval(input int gi, input int k, input int n, input int bits = 4);
    return (hash3(10 + gi, k, n) % (1 << bits)) - (1 << (bits - 1));
  endfunction
  function automatic int bval(input int gi, input int n);
    return (hash3(20 + gi, n, 0) % 512) - 256;
  endfunction
  function automatic int gammaval(input int which, input int i);
    return 40 + (hash3(30 + which, i, 0) % 50);
  endfunction
  function automatic int betaval(input int which, input int i);
    return (hash3(40 + which, i, 0) % 16) - 8;
  endfunction

  function automatic int rq_ref(input longint acc, input int mult, input int shift);
    longint p;
    p = acc * mult;
    if (shift != 0) p = p + (64'sd1 <<< (shift - 1));
    p = p >>> shift;
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return int'(p);
  endfunction

  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // integer softmax of one row (value x/16), optional causal limit q
  function automatic void softmax_ref(input int row[], input int q, input bit causal,
                                      output int p[]);
    int n, mx;
    longint e[], sum, r, pr;
    n = row.size();
    p = new[n];
    e = new[n];
    mx = -128;
    for (int j = 0; j < n; j++) if (!(causal && j > q) && row[j] > mx) mx = row[j];
    sum = 0;
    for (int j = 0; j < n; j++) begin
      longint t, ni, f16, poly;
      t = longint'(row[j] - mx) * 23637;
      ni = t >>> 18;
      f16 = (t & ((64'sd1 << 18) - 1)) >> 2;
      poly = 65536 + ((f16 * (43024 + ((22511 * f16) >> 16))) >> 16);
      if (causal && j > q) e[j] = 0;
      else if (ni < -16) e[j] = 0;
      else e[j] = poly >> (-ni);
      sum += e[j];
    end
    r = (64'sd1 << 40) / sum;
    for (int j = 0; j < n; j++) begin
      pr = (e[j] * r + (64'sd1 << 32)) >> 33;
      p[j] = (pr > 127) ? 127 : int'(pr);
    end
  endfunction

  // integer LayerNorm of one row, output Q4
  function automatic void layernorm_ref(input int row[], input int which, output int y[]);
    int n;
    longint s, q, v, res, inv, num, pr;
    n = row.size();
    y = new[n];
    s = 0; q = 0;
    for (int i = 0; i < n; i++) begin s += row[i]; q += row[i] * row[i]; end
    v = n * q - s * s;
    res = 0;
    while ((res + 1) * (res + 1) <= v) res++;
    if (res == 0) res = 1;
    inv = (64'sd1 << 36) / res;
    for (int i = 0; i < n; i++) begin
      num = longint'(n) * row[i] - s;
      pr = num * inv * gammaval(which, i);
      pr = (pr + (64'sd1 <<< 37)) >>> 38;
      y[i] = sat8(int'(pr) + betaval(which, i));
    end
  endfunction

  function automatic int gelu_ref(input int x);
    int ax, u, dd;
    longint sq, erfq, prod;
    ax = (x < 0) ? -x : x;
    u = ax * 181;
    if (u > 7246) u = 7246;
    dd = u - 7246;
    sq = longint'(dd) * dd;
    erfq = 4096 - ((1183 * sq) >>> 24);
    if (x < 0) erfq = -erfq;
    prod = longint'(x) * (4096 + erfq);
    prod = (prod + 4096) >>> 13;
    return sat8(int'(prod));
  endfunction

  // requantisation shift used by the tests for a reduction of length k
  function automatic int shift_for(input int k);
    return $clog2(k) / 2 + 3;
  endfunction

endpackage
