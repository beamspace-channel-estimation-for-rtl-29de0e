// beaches_ref_pkg: reference model of the hardware BEACHES threshold search,
// used by the testbenches to check the RTL.
//
// It works on the same fixed-point integers as the RTL (magnitudes with 8
// fraction bits, E0/B with 15 fraction bits, reciprocals with 2 fraction
// bits) but is written directly from the algorithm: sort the magnitudes,
// then for k = 1..B evaluate
//   SURE_k * B - E0 * B = S + (B-k+1) t^2 - E0 t V - 2 E0 (k-1),  t = y_(k)
// with every term expressed in units of 2^-25, and keep the first minimum.
package beaches_ref_pkg;

  // 1/x for x = idx/256, rounded to a multiple of 1/4; 4095 for x = 0.
  function automatic longint ref_recip(int unsigned idx);
    if (idx == 0) return 4095;
    return longint'($rtoi(1024.0 / real'(idx) + 0.5));
  endfunction

  function automatic void ref_tau(input int unsigned x[$], input longint e0,
                                  output int unsigned tau, output longint smin);
    int unsigned xs[$];
    longint s, v, sure, t;
    int unsigned n;
    xs = x;
    xs.sort();
    n = xs.size();
    v = 0;
    foreach (xs[i]) v += ref_recip(xs[i]);
    s = 0;
    smin = 0;
    tau = 0;
    for (int unsigned k = 1; k <= n; k++) begin
      t = longint'(xs[k-1]);
      sure = ((s + longint'(n - k + 1) * t * t) <<< 9)
           - (e0 * t * v + ((e0 * longint'(k - 1)) <<< 11));
      if (k == 1 || sure < smin) begin
        smin = sure;
        tau  = xs[k-1];
      end
      s += t * t;
      v -= ref_recip(xs[k-1]);
    end
  endfunction

  // Soft thresholding of one magnitude.
  function automatic int unsigned ref_shrink(int unsigned m, int unsigned tau);
    return (m > tau) ? m - tau : 0;
  endfunction

endpackage
