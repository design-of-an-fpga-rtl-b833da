// qrm_ref_pkg -- behavioural reference of the rearrangement, used by the
// testbenches to work out expected values independently of the RTL.
//
// Arrays are held as mat_t, up to 128 lines of up to 128 bits, a[R][C].
// The models work site by site, the way atoms move, not with the bit
// shifting of the pipeline:
//   ref_pass      one compression pass over n lines: for k = 0..n-1, if site
//                 k of a line is empty (and enabled), slide every site beyond
//                 it one step toward index 0; report column k, the command
//                 and whether any atom moved.
//   apply_move    executes one move record on an array in original
//                 coordinates and reports whether it was legal (hole empty).
//   quad_get / quad_put   quadrant-local view of an array (index 0 next to
//                 the centre).
package qrm_ref_pkg;
  typedef bit [127:0] vec_t;
  typedef vec_t mat_t [128];

  function automatic void ref_pass(input mat_t lines, input int n, input vec_t en,
                                   output mat_t col, output mat_t cmd, output mat_t mov);
    bit a [128];
    for (int k = 0; k < 128; k++) begin col[k] = '0; cmd[k] = '0; mov[k] = '0; end
    for (int r = 0; r < n; r++) begin
      for (int s = 0; s < n; s++) a[s] = lines[r][s];
      for (int k = 0; k < n; k++) begin
        if (en[k] && !a[k]) begin
          bit any = 0;
          for (int s = k + 1; s < n; s++) any |= a[s];
          cmd[k][r] = 1'b1;
          mov[k][r] = any;
          for (int s = k; s < n - 1; s++) a[s] = a[s+1];
          a[n-1] = 1'b0;
        end
        col[k][r] = a[k];
      end
    end
  endfunction

  // quadrant q: 0 NW, 1 NE, 2 SW, 3 SE
  function automatic int orig_row(int w, int q, int i);
    return (q < 2) ? (w/2 - 1 - i) : (w/2 + i);
  endfunction
  function automatic int orig_col(int w, int q, int j);
    return (q % 2 == 0) ? (w/2 - 1 - j) : (w/2 + j);
  endfunction

  function automatic mat_t quad_get(input mat_t a, input int w, input int q);
    mat_t m;
    for (int i = 0; i < 128; i++) m[i] = '0;
    for (int i = 0; i < w/2; i++)
      for (int j = 0; j < w/2; j++)
        m[i][j] = a[orig_row(w, q, i)][orig_col(w, q, j)];
    return m;
  endfunction

  // one full QRM run on a quadrant: n_iter x (row pass, column pass)
  function automatic mat_t ref_quadrant(input mat_t m, input int n, input int n_iter,
                                        input vec_t en_r, input vec_t en_c);
    mat_t c1, c2, cm, mv;
    for (int it = 0; it < n_iter; it++) begin
      ref_pass(m, n, en_r, c1, cm, mv);
      ref_pass(c1, n, en_c, c2, cm, mv);
      m = c2;
    end
    return m;
  endfunction

  function automatic bit apply_move(ref mat_t a, input int w, input bit axis, input bit side,
                                    input int line, input vec_t sel);
    bit ok = 1;
    for (int x = 0; x < w; x++) begin
      if (!sel[x]) continue;
      if (axis == 0) begin            // horizontal, row x
        if (a[x][line]) ok = 0;
        if (side == 0) begin for (int c = line; c > 0; c--) a[x][c] = a[x][c-1]; a[x][0] = 0; end
        else           begin for (int c = line; c < w-1; c++) a[x][c] = a[x][c+1]; a[x][w-1] = 0; end
      end else begin                  // vertical, column x
        if (a[line][x]) ok = 0;
        if (side == 0) begin for (int r = line; r > 0; r--) a[r][x] = a[r-1][x]; a[0][x] = 0; end
        else           begin for (int r = line; r < w-1; r++) a[r][x] = a[r+1][x]; a[w-1][x] = 0; end
      end
    end
    return ok;
  endfunction
endpackage
