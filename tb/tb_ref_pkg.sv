// tb_ref_pkg: reference models used by the testbenches, written independently of the RTL.
//
// sobol_ref(dim, n, W): the n-th point (Gray-code order, n = 0 first) of Sobol dimension 0
// (van der Corput) or 1 (primitive polynomial x + 1), as a W-bit integer, W <= 10. The
// direction numbers are tabulated here rather than computed: dim 1 uses m = 1, 3, 5, 15, 17,
// 51, 85, 255, 257, 771.
// stanh_step(): one step of the saturating-counter STanh with 2**stw states.
package tb_ref_pkg;
  function automatic int unsigned sobol_ref(input int unsigned dim, input int unsigned n,
                                            input int unsigned W);
    int unsigned m1 [10] = '{1, 3, 5, 15, 17, 51, 85, 255, 257, 771};
    int unsigned g, x;
    g = n ^ (n >> 1);
    x = 0;
    for (int unsigned k = 0; k < W; k++)
      if ((g >> k) & 1)
        x ^= (dim == 0) ? (1 << (W - 1 - k)) : (m1[k] << (W - 1 - k));
    return x;
  endfunction

  // Returns the next state; out = next state in the upper half.
  function automatic int stanh_step(input int state, input int sum, input int nin,
                                    input int stw);
    int t;
    t = state + 2 * sum - nin;
    if (t > (1 << stw) - 1) t = (1 << stw) - 1;
    if (t < 0) t = 0;
    return t;
  endfunction
endpackage
