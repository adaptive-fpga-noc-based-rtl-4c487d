// mspec_model_pkg: reference arithmetic for the testbenches, written
// independently of the RTL: spectrum-to-RGB projection with saturation and
// the integer RGB distance.
package mspec_model_pkg;

  // R, G, B of one spectrum: sum of sample * reference value, divided by 256
  // and limited to 255.
  function automatic void project(input int unsigned spec[], input int unsigned coef[][3],
                                  output int unsigned rgb[3]);
    for (int c = 0; c < 3; c++) begin
      longint unsigned s;
      s = 0;
      for (int k = 0; k < spec.size(); k++) s += spec[k] * coef[k][c];
      s = s / 256;
      rgb[c] = (s > 255) ? 255 : int'(s);
    end
  endfunction

  // floor of the Euclidean distance of two RGB triples
  function automatic int unsigned distance(input int unsigned a[3], input int unsigned b[3]);
    int unsigned dsq = 0, r = 0;
    for (int c = 0; c < 3; c++) begin
      int d;
      d = int'(a[c]) - int'(b[c]);
      dsq += d * d;
    end
    while ((r + 1) * (r + 1) <= dsq) r++;
    return r;
  endfunction

endpackage
