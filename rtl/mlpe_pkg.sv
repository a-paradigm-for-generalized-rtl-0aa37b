// mlpe_pkg: size arithmetic shared by the multi-level priority encoders.
//
// All encoders here take a power-of-two input width n and produce a
// log2(n)-bit position. The sizes of the sub-encoders are powers of two
// derived from n:
//   * two-level (and each level of a composed encoder):
//       L1 = 2^ceil(log2(sqrt(n))), L2 = n / L1
//   * cascaded with m levels, sizes unified over all levels:
//       L_i = 2^ceil(log2((n / (L_1*...*L_{i-1}))^(1/(m-i+1))))
// Because n is a power of two, log2 of every quantity is an integer and the
// roots reduce to integer ceiling divisions of exponents, which is how the
// functions below compute them. The level-limit rules (when fewer levels
// than requested are built) are this design's own choice.
package mlpe_pkg;

  // floor(log2(n)) for n >= 1
  function automatic int unsigned lg2(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((n >> (r + 1)) != 0) r++;
    return r;
  endfunction

  // Coarse size L1 of a two-level stage of n inputs.
  function automatic int unsigned two_level_l1(input int unsigned n);
    return 32'd1 << ((lg2(n) + 1) / 2);
  endfunction

  // Size L_i (1 <= i <= m) of a cascaded m-level encoder of n inputs.
  function automatic int unsigned cascade_l(input int unsigned n, input int unsigned m,
                                            input int unsigned i);
    int unsigned r, k, e;
    r = lg2(n);
    e = 0;
    for (int unsigned j = 1; j <= i; j++) begin
      k = m - j + 1;
      e = (r + k - 1) / k;   // ceil(r / k)
      r = r - e;
    end
    return 32'd1 << e;
  endfunction

  // Product L_1 * ... * L_i of a cascaded m-level encoder of n inputs.
  function automatic int unsigned cascade_prefix(input int unsigned n, input int unsigned m,
                                                 input int unsigned i);
    int unsigned p;
    p = 1;
    for (int unsigned j = 1; j <= i; j++) p = p * cascade_l(n, m, j);
    return p;
  endfunction

  // Levels actually built by a composed encoder: a 2LPE needs at least 4 inputs.
  function automatic int unsigned composed_levels(input int unsigned n, input int unsigned max_lvls);
    return (max_lvls < 2 || n < 4) ? 1 : max_lvls;
  endfunction

  // Levels actually built by a cascaded encoder: every L_i must be at least 2.
  function automatic int unsigned cascaded_levels(input int unsigned n, input int unsigned max_lvls);
    int unsigned m;
    m = (max_lvls < 1) ? 1 : max_lvls;
    while (m > 1 && lg2(n) < m) m--;
    return m;
  endfunction

endpackage
