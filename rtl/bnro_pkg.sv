// bnro_pkg: index arithmetic shared by the baseline network with reversed
// outputs (BNRO) and its controller.
//
// An N-layer BNRO has 2^N inputs, 2^N outputs and N layers of 2^(N-1) two-by-two
// switches. Wires are numbered by "position": switch r of a layer owns the
// positions 2r (its input/output 0) and 2r+1 (its input/output 1).
//
//  * bitrev(v, n)      reverses the n low bits of v. The last layer delivers
//                      network output m at position bitrev(m, N).
//  * next_pos(p, l, n) gives the input position in layer l+1 that is wired to
//                      output position p of layer l. Writing p = {a, b, j} with
//                      a = l bits, b = n-1-l bits and j the switch output,
//                      the wire lands at {a, j, b}: the low n-l bits rotate right
//                      by one. This is the recursive rule of the baseline
//                      network: output 0 of every switch feeds the upper
//                      sub-network, output 1 the lower one.
//  * switch_index(l, k, m, n) is the switch of layer l through which input k
//                      reaches output m: r = {bitrev(m[l-1:0]), k[n-1:l+1]}.
//                      This is the numbering S_l,r printed in the 16-input
//                      topology drawing of the paper.
// All functions are constant-foldable and are used with elaboration-time
// arguments or inside unrolled loops.
package bnro_pkg;

  function automatic int unsigned bitrev(int unsigned v, int unsigned n);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < n; b++)
      if (((v >> b) & 1) != 0) r |= 1 << (n - 1 - b);
    return r;
  endfunction

  function automatic int unsigned next_pos(int unsigned p, int unsigned l, int unsigned n);
    int unsigned w, lo, hi;
    w  = n - l;
    lo = p & ((1 << w) - 1);
    hi = p >> w;
    return (hi << w) | ((lo & 1) << (w - 1)) | (lo >> 1);
  endfunction

  function automatic int unsigned switch_index(int unsigned l, int unsigned k,
                                               int unsigned m, int unsigned n);
    int unsigned a, b;
    a = bitrev(m & ((1 << l) - 1), l);
    b = k >> (l + 1);
    return (a << (n - 1 - l)) | b;
  endfunction

endpackage
