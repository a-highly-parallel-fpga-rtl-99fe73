// tb_ref_pkg: reference arithmetic for the testbenches, written apart from the
// RTL. Values are plain integers in units of 2^-8 (the (12,3,8) format).
package tb_ref_pkg;
  function automatic int clip(input longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction
  function automatic int add(input int a, input int b);
    return clip(longint'(a) + longint'(b));
  endfunction
  function automatic int sub(input int a, input int b);
    return clip(longint'(a) - longint'(b));
  endfunction
  // product scaled by 2^-(8+sh), rounded towards minus infinity
  function automatic int mul(input int a, input int b, input int sh = 0);
    longint p, d, q;
    p = longint'(a) * longint'(b);
    d = longint'(1) << (8 + sh);
    q = p / d;
    if ((p % d != 0) && (p < 0)) q = q - 1;
    return clip(q);
  endfunction
  function automatic int sig(input int x);
    real s;
    s = 1.0 / (1.0 + $exp(-real'(x) / 256.0));
    return int'($floor(s * 256.0 + 0.5));
  endfunction
  function automatic int dsig(input int x);
    real s;
    s = 1.0 / (1.0 + $exp(-real'(x) / 256.0));
    return 4 * int'($floor(s * (1.0 - s) * 64.0 + 0.5));
  endfunction
  // pairwise tree of clipping adders over n (power of two) values
  function automatic int tree(input int v [], input int n);
    int t [];
    t = new[n];
    for (int i = 0; i < n; i++) t[i] = v[i];
    for (int w = n; w > 1; w = w / 2)
      for (int i = 0; i < w / 2; i++) t[i] = add(t[2*i], t[2*i+1]);
    return t[0];
  endfunction
  // left neuron connected to weight lane p in weight cycle k of a junction
  // (the interleaver rule: bank (p+rot_s) mod Z, address (sv_s[bank]+c) mod D)
  function automatic int left_of(input int seed, input int z, input int nl, input int k, input int p);
    int d, s, c, rot, bank, addr;
    d = nl / z; s = k / d; c = k % d;
    rot  = (s == 0) ? 0 : int'(mix(seed * 32'h85ebca6b ^ (s << 8) ^ 32'hc2b2ae35) % z);
    bank = (p + rot) % z;
    addr = int'((mix(seed * 32'h9e3779b9 ^ (s << 16) ^ bank ^ 32'h5bd1e995) % d + c) % d);
    return addr * z + bank;
  endfunction
  function automatic logic [31:0] mix(input logic [31:0] x);
    logic [31:0] h;
    h = x; h = h ^ (h >> 16); h = h * 32'h7feb352d; h = h ^ (h >> 15);
    h = h * 32'h846ca68b; h = h ^ (h >> 16);
    return h;
  endfunction
endpackage
