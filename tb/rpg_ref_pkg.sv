// rpg_ref_pkg: reference model for the testbenches. It computes, in plain
// procedural code, the permutation the random permutation generator must
// produce for a given seed:
//   - the LFSR bit stream s[n] from the recurrence
//       s[n+32] = s[n] ^ s[n+1] ^ s[n+21] ^ s[n+31],  s[0..31] = seed bits
//     (seed bit 0 first; an all-zero seed counts as 1);
//   - 64 random indexes, index j = s[6j..6j+5] with s[6j] as its MSB;
//   - the designed permutation written out as its four runs
//       0b..33, 3f..39, 0a..00, 38..34;
//   - the 64 Fisher-Yates steps with Eq. (10) for steps 0..11 and Eq. (11)
//     for steps 12..63, each drawn element replacing REG[rest];
//   - the final rotation by six.
package rpg_ref_pkg;

  typedef logic [5:0] p6_t;
  typedef p6_t perm64_t [64];

  function automatic perm64_t designed();
    perm64_t d;
    int n = 0;
    // runs 0b..33, 3f..39, 0a..00, 38..34 (decimal bounds)
    for (int v = 11; v <= 51; v++) d[n++] = p6_t'(v);
    for (int v = 63; v >= 57; v--) d[n++] = p6_t'(v);
    for (int v = 10; v >= 0;  v--) d[n++] = p6_t'(v);
    for (int v = 56; v >= 52; v--) d[n++] = p6_t'(v);
    return d;
  endfunction

  function automatic void lfsr_bits(input logic [31:0] seed, output bit s [384]);
    bit t [416];
    logic [31:0] sd = (seed == 0) ? 32'd1 : seed;
    for (int i = 0; i < 32; i++) t[i] = sd[i];
    for (int n = 0; n + 32 < 416; n++) t[n+32] = t[n] ^ t[n+1] ^ t[n+21] ^ t[n+31];
    for (int i = 0; i < 384; i++) s[i] = t[i];
  endfunction

  function automatic perm64_t indexes(input logic [31:0] seed);
    bit s [384];
    perm64_t ix;
    lfsr_bits(seed, s);
    for (int j = 0; j < 64; j++) begin
      p6_t v = '0;
      for (int b = 0; b < 6; b++) v = {v[4:0], s[6*j+b]};
      ix[j] = v;
    end
    return ix;
  endfunction

  function automatic int adj0(input int idx);
    return (idx <= 40) ? idx : idx - 40;
  endfunction

  function automatic int adj1(input int idx, input int rest);
    return (idx <= rest) ? idx : (idx & rest);
  endfunction

  function automatic perm64_t expected(input logic [31:0] seed);
    perm64_t r = designed();
    perm64_t ix = indexes(seed);
    perm64_t o, f;
    for (int k = 0; k < 64; k++) begin
      int rest = 63 - k;
      int sel = (k < 12) ? adj0(int'(ix[k])) : adj1(int'(ix[k]), rest);
      o[k] = r[sel];
      r[sel] = r[rest];
    end
    for (int i = 0; i < 64; i++) f[i] = o[(i + 6) % 64];
    return f;
  endfunction

  function automatic bit is_perm(input perm64_t p);
    bit seen [64];
    for (int i = 0; i < 64; i++) begin
      if (seen[p[i]]) return 0;
      seen[p[i]] = 1;
    end
    return 1;
  endfunction

endpackage
