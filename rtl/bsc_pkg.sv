// bsc_pkg: constants and elaboration-time helpers shared by the bit-stream
// arithmetic units.
//
// A bit stream of length n carries the value (number of 1s)/n; every unit in
// this library consumes one stream bit per clock cycle. The helpers below are
// evaluated only while parameters are resolved (they size registers and place
// delay taps) and produce no hardware of their own.
//
// aism_delay1/aism_delay2 give the cumulative delay, in bit durations, of
// Input-1 and Input-2 in front of AND gate g (g = 1 .. 2n-1) of the
// asynchronous multiplier. They add up the per-gate delay differences that the
// paper lists for the two inputs:
//   Input-1: 0 (g=1); n-(g-1) (g=2..n); n (g=n+1); g-(n+1) (g=n+2..2n-1)
//   Input-2: 0 (g=1); n-(g-2) (g=2..n); -(n-2) (g=n+1); g-n (g=n+2..2n-1)
// For n=3 they give the pairs (0,0) (2,3) (3,5) (6,4) (7,6).
package bsc_pkg;

  // Width of a stream counter for an n-bit stream: log2(n)+1 bits, enough to
  // hold every value 0..n.
  function automatic int unsigned count_width(input int unsigned n);
    return $clog2(n) + 1;
  endfunction

  function automatic int aism_step1(input int n, input int g);
    if (g == 1)       return 0;
    else if (g <= n)  return n - (g - 1);
    else if (g == n+1) return n;
    else              return g - (n + 1);
  endfunction

  function automatic int aism_step2(input int n, input int g);
    if (g == 1)       return 0;
    else if (g <= n)  return n - (g - 2);
    else if (g == n+1) return -(n - 2);
    else              return g - n;
  endfunction

  function automatic int aism_delay1(input int n, input int g);
    int acc;
    acc = 0;
    for (int k = 1; k <= g; k++) acc += aism_step1(n, k);
    return acc;
  endfunction

  function automatic int aism_delay2(input int n, input int g);
    int acc;
    acc = 0;
    for (int k = 1; k <= g; k++) acc += aism_step2(n, k);
    return acc;
  endfunction

endpackage
