// tb_dl_pkg: reference model shared by the Legion and top-level testbenches.
//
// A dl_job holds one (M, K, N, mode) matrix product: random int8 activations A
// (M x K), weights W (K x N) in the mode's range (2-bit, 4-bit or 8-bit signed),
// optional structurally zero tiles, and the zero-tile-book masks that describe
// them. It produces the bytes a tile feeder sends to a Legion (column-rotated
// weight rows packed R sub-tiles per byte, activation rows per core), the
// expected products, and where the Legion stores each result element.
package tb_dl_pkg;
  import dlegion_pkg::*;

  class dl_job;
    int D, C, m, k, n, r, mt, kt, ntn, aw;
    mode_e md;
    int a[];      // m*k
    int w[];      // k*n
    int zm[];     // per window: bit c = tile of core c is zero

    function new(int D_, int C_, int m_, int k_, int n_, int md_, int aw_);
      D = D_; C = C_; m = m_; k = k_; n = n_; md = mode_e'(md_); aw = aw_;
      r = (md == MODE_PROJ2) ? 4 : (md == MODE_PROJ4) ? 2 : 1;
      mt = (m + D - 1) / D; kt = (k + C*D - 1) / (C*D); ntn = (n + r*D - 1) / (r*D);
      a = new[m*k]; w = new[k*n]; zm = new[kt*ntn];
    endfunction

    // zkind: 0 dense, 1 some zero tiles, 2 also fully-zero windows and one
    // fully-zero N-tile (tile 0)
    function void fill(int zkind);
      int lo, hi;
      lo = (md == MODE_PROJ2) ? -2 : (md == MODE_PROJ4) ? -8 : -128;
      hi = -lo - 1;
      if (md == MODE_PROJ2) begin lo = -1; hi = 1; end   // ternary weights
      foreach (a[i]) a[i] = $urandom_range(0, 255) - 128;
      foreach (w[i]) w[i] = $urandom_range(0, hi - lo) + lo;
      foreach (zm[i]) begin
        zm[i] = 0;
        if (zkind >= 1 && $urandom_range(0, 2) == 0) zm[i] = $urandom_range(1, (1 << C) - 2);
        if (zkind == 2 && $urandom_range(0, 3) == 0) zm[i] = (1 << C) - 1;
        if (zkind == 2 && i < kt) zm[i] = (1 << C) - 1;
      end
      apply_zm();
    endfunction

    // force the weights of every tile marked in zm to zero
    function void apply_zm();
      for (int t = 0; t < ntn; t++)
        for (int kw = 0; kw < kt; kw++)
          for (int c = 0; c < C; c++)
            if (zm[t*kt + kw][c])
              for (int kk = (kw*C + c)*D; kk < (kw*C + c + 1)*D && kk < k; kk++)
                for (int nn = t*r*D; nn < (t+1)*r*D && nn < n; nn++)
                  w[kk*n + nn] = 0;
    endfunction

    function bit skipped(int t, int kw);
      return zm[t*kt + kw] == (1 << C) - 1;
    endfunction

    // weight byte for core c, N-tile t, window kw, PE row i, column j
    function logic [7:0] wbyte(int t, int kw, int c, int i, int j);
      logic [7:0] b; int kk, nn, v;
      b = '0;
      kk = (kw*C + c)*D + ((j - i + D) % D);
      for (int g = 0; g < r; g++) begin
        nn = (t*r + g)*D + j;
        v = (kk < k && nn < n) ? w[kk*n + nn] : 0;
        case (md)
          MODE_PROJ2: b[2*g +: 2] = 2'(v);
          MODE_PROJ4: b[4*g +: 4] = 4'(v);
          default:    b = 8'(v);
        endcase
      end
      return b;
    endfunction

    // activation byte for core c, window kw, row mm, lane kl
    function logic [7:0] abyte(int kw, int c, int mm, int kl);
      int kk; kk = (kw*C + c)*D + kl;
      return (mm < m && kk < k) ? 8'(a[mm*k + kk]) : 8'h00;
    endfunction

    function longint expect_v(int mm, int nn);
      longint s; s = 0;
      for (int kk = 0; kk < k; kk++) s += a[mm*k + kk] * w[kk*n + nn];
      return s;
    endfunction

    // where element (mm, nn) is stored: bank, row address, column
    function void where(int mm, int nn, output int bank, output int row, output int col);
      int t, g;
      col = nn % D;
      if (md == MODE_DENSE) begin
        t = nn / D; bank = t % 4; row = (t / 4) * mt * D + mm;
      end else begin
        t = nn / (r*D); g = (nn / D) % r; bank = g; row = t * mt * D + mm;
      end
    endfunction

    // stored value as the hardware keeps it (16-bit lanes in projection modes)
    function logic [31:0] stored(int mm, int nn);
      longint v; v = expect_v(mm, nn);
      return (md == MODE_DENSE) ? 32'(v) : {{16{v[15]}}, v[15:0]};
    endfunction
  endclass

endpackage
