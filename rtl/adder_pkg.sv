// adder_pkg: constants and parameter rules shared by the fan-out-two adder.
//
// The adder is built from two constructions. An outer part applies TAU
// Brent-Kung halving steps; an inner multi-input generate adder with radix
// 2^R and K rows handles the N/2^TAU positions that are left. The functions
// below derive TAU, R and K from the width N with the rules of the
// construction's main size/depth theorem:
//   TAU = ceil( sqrt(log2 N) + 2*log2(ceil(sqrt(log2 N))) ), at most log2 N - 1
//   R = K = ceil( sqrt(log2 (N / 2^TAU)) ), at least 1
// For N = 4096 this gives TAU = 8 and an inner adder of 16 positions with
// R = K = 2. Every module also accepts explicit values, so a designer can pick
// another trade-off (for example TAU = 0 for the fastest, super-linear form).
package adder_pkg;

  // Smallest s with s*s >= v (integer ceiling of the square root).
  function automatic int ceil_sqrt(int v);
    int s;
    s = 1;
    while (s * s < v) s++;
    return s;
  endfunction

  // Number of Brent-Kung steps for an N-bit adder.
  function automatic int tau_for(int n);
    int  l;
    int  s;
    int  t;
    real v;
    l = $clog2(n);
    s = ceil_sqrt(l);
    v = $sqrt(real'(l)) + 2.0 * $ln(real'(s)) / $ln(2.0);
    // The small offset makes exact integers (e.g. l = 16) round correctly.
    t = int'($ceil(v - 1.0e-9));
    if (t > l - 1) t = l - 1;
    if (t < 0) t = 0;
    return t;
  endfunction

  // Radix exponent R (= row count K) of the inner adder for ni positions.
  function automatic int rk_for(int ni);
    int l;
    l = $clog2(ni);
    if (l < 1) return 1;
    return ceil_sqrt(l);
  endfunction

endpackage
