// sparse_ref_pkg: plain integer reference model of the sparse population
// transform, used by the testbenches to work out expected results
// independently of the RTL.
//
//   proj_i  = sum_k D[i][k] * x[k]
//   y_i     = proj_i >= tau
//   raw[k]  = floor( (sum over y_i = 1 of D[i][k]) / 2^shift )
//   lpf     = passes x  v'[k] = floor((v[k-1] + 2 v[k] + v[k+1] + 2) / 4),
//             edges repeated
//   out[k]  = lpf[k] clipped to [-127, 127]
package sparse_ref_pkg;
  import sparse_pkg::*;

  typedef int vec_t [DIM];

  // Floor division by a power of two, written without shift operators.
  function automatic int floor_div(int a, int d);
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic int clip(int v);
    if (v > SAMPLE_MAX)  return SAMPLE_MAX;
    if (v < -SAMPLE_MAX) return -SAMPLE_MAX;
    return v;
  endfunction

  function automatic vec_t lpf_ref(vec_t v, int passes);
    vec_t n;
    for (int p = 0; p < passes; p++) begin
      for (int k = 0; k < DIM; k++) begin
        int a, c;
        a = v[(k == 0) ? 0 : k - 1];
        c = v[(k == DIM - 1) ? DIM - 1 : k + 1];
        n[k] = floor_div(a + 2 * v[k] + c + 2, 4);
      end
      v = n;
    end
    return v;
  endfunction

  // Sum of squared second differences: a measure of high-frequency energy.
  function automatic longint roughness(vec_t v);
    longint r = 0;
    for (int k = 1; k < DIM - 1; k++) begin
      longint d = longint'(v[k-1]) - 2 * longint'(v[k]) + longint'(v[k+1]);
      r += d * d;
    end
    return r;
  endfunction

endpackage
