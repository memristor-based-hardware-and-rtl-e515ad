// Testbench support: random planted 3-SAT instances, their mapping onto the
// solver's tiles, and a reference energy model.
//
// An instance has n variables and m clauses of three distinct variables with
// random signs, generated so that a hidden random assignment satisfies every
// clause (so a solution is known to exist).
//
// Mapping. The energy E(x) is the number of unsatisfied clauses. A clause with
// literals a, b, c is unsatisfied when f_a f_b f_c = 1, where f = 1 - x for a
// positive literal and f = x for a negative one. Its derivative with respect
// to the variable of a is  sigma_a * f_b * f_c  with sigma = -1 (positive) or
// +1 (negative). Writing f = alpha + beta*x (alpha, beta = 1, -1 for a positive
// literal and 0, 1 for a negative one) the product expands into
//   sigma*(alpha_b alpha_c + beta_b alpha_c x_b + alpha_b beta_c x_c + beta_b beta_c x_b x_c),
// i.e. a constant, two single-variable terms and one pair term. Each distinct
// term of a tile becomes one CENC row (the pattern: its variables); its
// coefficient for each of the tile's variables goes into the positive or
// negative bit line of that column. Because E is multilinear, flipping x_i
// changes E by (1 - 2 x_i) * dE/dx_i exactly.
package sat3_pkg;

  class Sat3Instance;
    int n, m;
    int cv[];     // clause variable, index 3*k + l
    bit cn[];     // literal is negated
    bit sol[];    // planted solution
    int occ[$];   // scratch

    // mapping results, flattened
    int n_col, n_wl, n_tile, wmax;
    int rows_used[];   // [tile]
    int row_j[];       // [tile*n_wl + row], -1 if unused
    int row_k[];
    int coef[];        // [(tile*n_wl + row)*n_col + col]

    function new(int n_, int m_);
      n = n_; m = m_;
      cv = new[3*m]; cn = new[3*m]; sol = new[n];
    endfunction

    function void generate_planted();
      foreach (sol[i]) sol[i] = 1'($urandom);
      for (int k = 0; k < m; k++) begin
        bit ok;
        do begin
          int a, b, c;
          a = $urandom_range(0, n-1);
          do b = $urandom_range(0, n-1); while (b == a);
          do c = $urandom_range(0, n-1); while (c == a || c == b);
          cv[3*k] = a; cv[3*k+1] = b; cv[3*k+2] = c;
          ok = 0;
          for (int l = 0; l < 3; l++) begin
            cn[3*k+l] = 1'($urandom);
            if (lit(k, l, sol)) ok = 1;
          end
        end while (!ok);
      end
    endfunction

    function bit lit(int k, int l, bit x[]);
      return cn[3*k+l] ? !x[cv[3*k+l]] : x[cv[3*k+l]];
    endfunction

    function int energy(bit x[]);
      int e = 0;
      for (int k = 0; k < m; k++)
        if (!(lit(k, 0, x) || lit(k, 1, x) || lit(k, 2, x))) e++;
      return e;
    endfunction

    // Energy change of flipping variable i, counted clause by clause.
    function int delta_e(bit x[], int i);
      int d = 0;
      bit y[];
      y = x;
      y[i] = !y[i];
      for (int k = 0; k < m; k++) begin
        if (cv[3*k] == i || cv[3*k+1] == i || cv[3*k+2] == i) begin
          bit u0 = !(lit(k, 0, x) || lit(k, 1, x) || lit(k, 2, x));
          bit u1 = !(lit(k, 0, y) || lit(k, 1, y) || lit(k, 2, y));
          d += int'(u1) - int'(u0);
        end
      end
      return d;
    endfunction

    // Returns 1 when every tile fits in n_wl_ rows and every coefficient in wmax_.
    function bit map_tiles(int n_col_, int n_wl_, int n_tile_, int wmax_);
      n_col = n_col_; n_wl = n_wl_; n_tile = n_tile_; wmax = wmax_;
      rows_used = new[n_tile];
      row_j = new[n_tile*n_wl]; row_k = new[n_tile*n_wl];
      coef = new[n_tile*n_wl*n_col];
      foreach (row_j[q]) begin row_j[q] = -1; row_k[q] = -1; end
      foreach (coef[q]) coef[q] = 0;
      for (int t = 0; t < n_tile; t++) begin
        int key2row [int];
        rows_used[t] = 0;
        for (int k = 0; k < m; k++) begin
          for (int a = 0; a < 3; a++) begin
            int i = cv[3*k+a];
            if (i >= t*n_col && i < (t+1)*n_col) begin
              int col = i - t*n_col;
              int lb = (a + 1) % 3, lc = (a + 2) % 3;
              int vb = cv[3*k+lb], vc = cv[3*k+lc];
              int sg = cn[3*k+a] ? 1 : -1;
              int ab = cn[3*k+lb] ? 0 : 1, bb = cn[3*k+lb] ? 1 : -1;
              int ac = cn[3*k+lc] ? 0 : 1, bc = cn[3*k+lc] ? 1 : -1;
              int tj [4], tk [4], tc [4];
              tj[0] = -1; tk[0] = -1; tc[0] = sg*ab*ac;
              tj[1] = vb; tk[1] = -1; tc[1] = sg*bb*ac;
              tj[2] = vc; tk[2] = -1; tc[2] = sg*ab*bc;
              tj[3] = (vb < vc) ? vb : vc; tk[3] = (vb < vc) ? vc : vb; tc[3] = sg*bb*bc;
              for (int q = 0; q < 4; q++) begin
                if (tc[q] != 0) begin
                  int key = (tj[q] + 1) * 4096 + (tk[q] + 1);
                  int r;
                  if (!key2row.exists(key)) begin
                    if (rows_used[t] == n_wl) return 0;
                    key2row[key] = rows_used[t];
                    row_j[t*n_wl + rows_used[t]] = tj[q];
                    row_k[t*n_wl + rows_used[t]] = tk[q];
                    rows_used[t]++;
                  end
                  r = key2row[key];
                  coef[(t*n_wl + r)*n_col + col] += tc[q];
                end
              end
            end
          end
        end
      end
      foreach (coef[q]) if (coef[q] > wmax || coef[q] < -wmax) return 0;
      return 1;
    endfunction

    function int max_rows();
      int mx = 0;
      foreach (rows_used[t]) if (rows_used[t] > mx) mx = rows_used[t];
      return mx;
    endfunction
  endclass

endpackage
