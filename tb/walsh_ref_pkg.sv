// walsh_ref_pkg: reference models used by the testbenches.
//
// Written from the mathematical definitions, not from the RTL:
//   wbar(l, m, i)   value of the Paley-ordered Walsh function Wbar_l in
//                   segment i of 2^m segments: XOR over j of b_j(l) * R_j(i),
//                   with R_j(i) = bit (m-1-j) of i (Rademacher of order j
//                   switches 2^(j+1) - 1 times, starting at 0).
//   bitw(x)         bit width of x.
//   sat(v, w)       saturate to a w-bit signed range.
//   sin_ref/cos_ref rounded A*sin / A*cos of a 13-bit phase, A = 8191.
//   asin_ref(p)     round(asin((2p - 8191)/8191) * 2047 / (pi/2)).
package walsh_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic bit wbar(int l, int m, int i);
    bit r;
    r = 1'b0;
    for (int j = 0; j < m; j++)
      if (((l >> j) & 1) != 0) r ^= 1'(((i >> (m - 1 - j)) & 1));
    return r;
  endfunction

  function automatic int bitw(int x);
    int w;
    w = 0;
    while ((x >> w) != 0) w++;
    return w;
  endfunction

  function automatic int sat(int v, int w);
    int hi, lo;
    hi = (1 << (w - 1)) - 1;
    lo = -(1 << (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  function automatic int sin_ref(int ph);
    return int'(8191.0 * $sin(2.0 * PI * real'(ph % 8192) / 8192.0));
  endfunction

  function automatic int cos_ref(int ph);
    return int'(8191.0 * $cos(2.0 * PI * real'(ph % 8192) / 8192.0));
  endfunction

  function automatic int asin_ref(int p);
    real x;
    x = real'(2 * p - 8191) / 8191.0;
    return int'($asin(x) * 2047.0 / (PI / 2.0));
  endfunction

  // signed value of the low w bits of v
  function automatic int sext(int v, int w);
    int u;
    u = v & ((1 << w) - 1);
    return (u >= (1 << (w - 1))) ? u - (1 << w) : u;
  endfunction

endpackage
