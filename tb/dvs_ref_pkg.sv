// dvs_ref_pkg: independent reference arithmetic for the testbenches.
//
// The shift-add arithmetic is recomputed here with ordinary multiplication and
// floor division on 64-bit integers (x * 2^(FRAC+p)), not with the shifts the
// design uses, so a wrong shift direction, sign or rounding shows up as a
// mismatch. Weight codes are produced by a deterministic hash so that the
// stimulus loader and the reference model agree without storing tables.
package dvs_ref_pkg;
  import dvs_pkg::*;

  function automatic longint floor_div(input longint a, input longint b);
    longint r;
    r = a % b;
    if (r != 0 && ((r < 0) != (b < 0))) return a / b - 1;
    return a / b;
  endfunction

  // x * 2^p in FRAC fixed point; code -32 means "no term"
  function automatic longint ref_term(input int x, input int p);
    longint v;
    v = longint'(x) * 65536;
    if (p == -32) return 0;
    if (p >= 0)   return v * (longint'(1) << p);
    return floor_div(v, longint'(1) << (-p));
  endfunction

  function automatic int ref_requant(input longint a);
    longint q;
    q = floor_div(a, 65536);
    if (q > 32767)  return 32767;
    if (q < -32768) return -32768;
    return int'(q);
  endfunction

  function automatic int ref_sat16(input int a);
    if (a > 32767)  return 32767;
    if (a < -32768) return -32768;
    return a;
  endfunction

  function automatic int unsigned hash32(input int unsigned a, input int unsigned b);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    return h;
  endfunction

  // One weight code: sign and shift counts. Shift counts are drawn from
  // [lo, lo+span-1]; about one in eight terms is "no term".
  function automatic int code_p(input int unsigned seed, input int unsigned idx, input int k,
                                input int lo, input int span);
    int unsigned h;
    h = hash32(seed, idx * 8 + k);
    if (h[2:0] == 3'd0) return -32;
    return lo + int'(h[15:8] % span);
  endfunction

  function automatic bit code_s(input int unsigned seed, input int unsigned idx);
    int unsigned h;
    h = hash32(seed ^ 32'h5555_0000, idx);
    return h[4];
  endfunction

  function automatic longint ref_weighted(input int x, input bit s, input int p [],
                                          input int n);
    longint t;
    t = 0;
    for (int k = 0; k < n; k++) t += ref_term(x, p[k]);
    return s ? -t : t;
  endfunction
endpackage
