// kan_ref_pkg: reference model used by the testbenches.
//
// The B-spline values are computed here with the Cox-de Boor recursion on
// integer knots in floating point, independently of the closed-form integer
// table of the design. The quantization conventions are those the design
// documents: the aligned input x_a = x_addr / 255, values scaled by 190.5
// (B_{0,3}(2) = 2/3 -> 127) and rounded to the nearest integer.
package kan_ref_pkg;

  // Cox-de Boor recursion on the integer knots 0, 1, 2, ...
  function automatic real cox_de_boor(int i, int p, real u);
    real left, right;
    if (p == 0) return (u >= real'(i) && u < real'(i + 1)) ? 1.0 : 0.0;
    left  = (u - real'(i)) / real'(p) * cox_de_boor(i, p - 1, u);
    right = (real'(i + p + 1) - u) / real'(p) * cox_de_boor(i + 1, p - 1, u);
    return left + right;
  endfunction

  // cardinal cubic B-spline B_{0,3}(u); the support end u = 4 is closed here
  // (it is zero there anyway)
  function automatic real b03(real u);
    return cox_de_boor(0, 3, u);
  endfunction

  function automatic int quant(real v);
    return $rtoi(v * 190.5 + 0.5);
  endfunction

  // interval index: largest i in 1..nint with knots[i] <= x, else 0
  function automatic int ref_k(int x, int knots[], int nint);
    for (int i = nint; i >= 1; i--) if (x >= knots[i]) return i;
    return 0;
  endfunction

  function automatic int ref_addr(int x, int t0, int nint, int k);
    int raw;
    raw = nint * (x - t0) - 255 * k;
    if (raw < 0) return 0;
    if (raw > 255) return 255;
    return raw;
  endfunction

  // value of lane i (B_{k-i}) for a given table address, before zeroing
  function automatic int ref_lane_raw(int addr, int i);
    return quant(b03(real'(addr) / 255.0 + real'(i)));
  endfunction

  // full lane value including zeroing outside the G+P functions
  function automatic int ref_lane(int x, int knots[], int nint, int i);
    int k, addr;
    k    = ref_k(x, knots, nint);
    addr = ref_addr(x, knots[0], nint, k);
    if (k - i < 0 || k - i >= nint - 3) return 0;
    return ref_lane_raw(addr, i);
  endfunction

endpackage
