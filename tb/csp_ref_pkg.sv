// csp_ref_pkg: reference model of the chip's variable update rule, for testbenches.
//
// f_hw(i, s, n): state s (1..n, 0 = no state yet) of an n-valued variable after an
// event whose input-port word is i. Bit p-1 of i allows state p. The state is kept if
// it is allowed (or i is 0); otherwise it becomes the lowest allowed state.
package csp_ref_pkg;

  function automatic int f_hw(input int unsigned i, input int s, input int n);
    int unsigned m;
    m = i & ((1 << n) - 1);
    if (m == 0) return s;
    if (s > 0 && m[s-1]) return s;
    for (int p = 1; p <= n; p++) if (m[p-1]) return p;
    return s;
  endfunction

endpackage
