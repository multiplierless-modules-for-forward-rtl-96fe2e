// dwt53_ref_pkg: software reference of the 5/3 integer lifting transform,
// written directly from the lifting equations with integer arithmetic, for
// the testbenches. Samples outside the frame are zero and d[-1] = 0.
package dwt53_ref_pkg;

  typedef int int_q_t[$];

  // floor(a / b) for b > 0 (SystemVerilog '/' truncates towards zero).
  function automatic int floordiv(input int a, input int b);
    int q;
    q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  function automatic int sample_at(const ref int_q_t x, input int i);
    if (i < 0 || i >= x.size()) return 0;
    return x[i];
  endfunction

  // Forward transform: npairs pairs (d[n], s[n]) of the zero-extended signal.
  function automatic void forward(const ref int_q_t x, input int npairs,
                                  ref int_q_t s, ref int_q_t d);
    int dprev;
    s = {};
    d = {};
    dprev = 0;
    for (int n = 0; n < npairs; n++) begin
      int dn;
      dn = sample_at(x, 2*n+1) - floordiv(sample_at(x, 2*n) + sample_at(x, 2*n+2), 2);
      d.push_back(dn);
      s.push_back(sample_at(x, 2*n) + floordiv(dn + dprev, 4));
      dprev = dn;
    end
  endfunction

  // Gaussian-like integer sample: mean + sum of 4 uniform values, clipped.
  function automatic int normal_sample(input int mean, input int spread, input int maxv);
    int acc;
    acc = 0;
    for (int k = 0; k < 4; k++) acc += int'($urandom_range(0, 2*spread));
    acc = mean + acc / 2 - 2*spread;
    if (acc < 0) acc = 0;
    if (acc > maxv) acc = maxv;
    return acc;
  endfunction

endpackage
