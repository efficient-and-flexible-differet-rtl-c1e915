// drmmm_pkg: shared constants and elaboration-time helpers of the
// different-radix Montgomery multiplier (DRMMM).
//
// The default configuration is the main instance of the design: a 1024-bit
// modulus, radix r = 2^16 (K = 16), a four-stage quotient pipeline (T = 4),
// 4-bit windows in the iM encoding layer and 6-bit windows in the iM'
// encoding layer. With these numbers the per-iteration compressor takes
// 24 vectors (16 partial products, 4 qM terms, 3 triplet terms, 1 carry
// term) and the first quotient stage takes 34 vectors (3 x ceil(64/6) + 1).
//
// The helpers below give the vector counts of the compressor trees. One
// level of 6-to-3 counters maps n vectors to 3*floor(n/6) plus the
// remainder, a remainder of 4 or 5 going through one more (partly empty)
// 6-to-3 counter and a remainder of up to 3 passing through untouched.
package drmmm_pkg;

  localparam int N_M_DEF  = 1024; // modulus width |M|
  localparam int K_DEF    = 16;   // digit width k, radix r = 2^k
  localparam int T_DEF    = 4;    // quotient pipeline stages t
  localparam int WM_DEF   = 4;    // iM encoding-layer window w
  localparam int WMP_DEF  = 6;    // iM' encoding-layer window w'

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Width of each term of the intermediate triplet: the pre-shift sum is
  // below (r^(t+1) + r) * M * r/(r-1) < 2^(N + k(t+1) + 1).
  function automatic int triplet_width(input int n, input int k, input int t);
    return n + k * (t + 1) + 1;
  endfunction

  // Vectors left after one level of 6-to-3 counters.
  function automatic int c63_next(input int n);
    int rem;
    rem = n % 6;
    return 3 * (n / 6) + ((rem <= 3) ? rem : 3);
  endfunction

  // Number of 6-to-3 levels needed to bring n vectors down to at most
  // max(nout, 3).
  function automatic int c63_levels(input int n, input int nout);
    int lim;
    int cnt;
    int lv;
    lim = (nout > 3) ? nout : 3;
    cnt = n;
    lv  = 0;
    while (cnt > lim) begin
      cnt = c63_next(cnt);
      lv++;
    end
    return lv;
  endfunction

  // Vector count after a given number of 6-to-3 levels.
  function automatic int c63_count(input int n, input int levels);
    int cnt;
    cnt = n;
    for (int i = 0; i < levels; i++) cnt = c63_next(cnt);
    return cnt;
  endfunction

endpackage
