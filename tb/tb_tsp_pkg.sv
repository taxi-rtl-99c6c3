// tb_tsp_pkg: test helpers shared by the macro and chip testbenches.
// Random city sets, the distance-to-conductance mapping
//   W_D(a,b) = round(D_min / D(a,b) * (2^B - 1)),  W_D(a,a) = 0,
// where D_min is the smallest distance inside the sub-problem, and tour
// lengths. Coordinates are integers on a 1000 x 1000 grid.
package tb_tsp_pkg;
  localparam int MAXN = 64;
  typedef int coord_t [MAXN][2];

  function automatic real cdist(const ref coord_t xy, input int a, input int b);
    real dx = real'(xy[a][0] - xy[b][0]);
    real dy = real'(xy[a][1] - xy[b][1]);
    return $sqrt(dx * dx + dy * dy);
  endfunction

  // W_D of cities ids[0..n-1] (indices into xy), for bit precision b.
  function automatic void wd_map(const ref coord_t xy, input int ids [], input int n, input int b,
                                 ref int w [MAXN][MAXN]);
    real dmin = 1.0e30;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++)
      if (i != j && cdist(xy, ids[i], ids[j]) < dmin) dmin = cdist(xy, ids[i], ids[j]);
    if (dmin < 1.0) dmin = 1.0;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++)
      if (i == j) w[i][j] = 0;
      else begin
        real d = cdist(xy, ids[i], ids[j]);
        if (d < 1.0) d = 1.0;
        w[i][j] = int'(dmin / d * real'((1 << b) - 1) + 0.5);
        if (w[i][j] > (1 << b) - 1) w[i][j] = (1 << b) - 1;
      end
  endfunction

  // Length of a path visiting ids[tour[0]], ids[tour[1]], ... (closed if cyc).
  function automatic real path_len(const ref coord_t xy, input int ids [], input int tour [],
                                   input int n, input bit cyc);
    real l = 0.0;
    for (int o = 0; o + 1 < n; o++) l += cdist(xy, ids[tour[o]], ids[tour[o + 1]]);
    if (cyc) l += cdist(xy, ids[tour[n - 1]], ids[tour[0]]);
    return l;
  endfunction
endpackage
