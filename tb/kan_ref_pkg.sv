// kan_ref_pkg: reference arithmetic for the testbenches, written from the
// mathematics of KAN B-splines rather than from the hardware structure.
//
// bspline(u): uniform cardinal B-spline of order 3 on [0,4) (knot spacing
// 1), peak 2/3 at u = 2. quant(v): maps [0, 2/3] onto the 2N-bit code range
// with rounding. lut_entry(a): content of SH-LUT entry a, i.e. the spline
// sampled at the centre of input code a, (a+0.5)/2^LD. b_ref(i, x): the
// 2N-bit value of basis function B_i at input code x, evaluated directly on
// the knot grid (B_i starts K intervals before domain interval i).
package kan_ref_pkg;

  function automatic real bspline(input real u);
    real t;
    if (u < 0.0 || u >= 4.0) return 0.0;
    t = (u > 2.0) ? 4.0 - u : u;     // the bump is symmetric about u = 2
    if (t < 1.0) return t * t * t / 6.0;
    return (-3.0 * t * t * t + 12.0 * t * t - 12.0 * t + 4.0) / 6.0;
  endfunction

  function automatic int quant(input real v, input int bw);
    return int'($floor(v / (2.0 / 3.0) * real'((1 << bw) - 1) + 0.5));
  endfunction

  function automatic int lut_entry(input int a, input int ld, input int bw);
    return quant(bspline((real'(a) + 0.5) / real'(1 << ld)), bw);
  endfunction

  function automatic int b_ref(input int i, input int x, input int g,
                               input int k, input int ld, input int bw);
    int xs;
    xs = (x > g * (1 << ld) - 1) ? g * (1 << ld) - 1 : x;
    return quant(bspline((real'(xs) + 0.5) / real'(1 << ld) - real'(i - k)), bw);
  endfunction

endpackage
