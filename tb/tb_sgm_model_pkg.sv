// tb_sgm_model_pkg: behavioural reference model of the SGM pipeline, used
// by the testbenches to compute expected values independently of the RTL.
//
// Everything is plain integer arithmetic on whole pixels and whole rows:
// contexts are read straight from stored images (pixels at negative
// coordinates are 0), the reference census history is a flat list over
// the whole stream, and the path recursions are written from the SGM
// equations rather than from the hardware structure. The model processes
// a frame row by row and keeps only the previous row of path costs, so it
// also runs at 3840x2160.
package tb_sgm_model_pkg;

  localparam int WINM = 5;

  // how often the model saw each mechanism (read by the testbenches)
  int unsigned cnt_p1  = 0;   // a P1 transition won the minimum
  int unsigned cnt_p2  = 0;   // the P2 jump won the minimum
  int unsigned cnt_est = 0;   // a 0-degree estimate differed from L(p_last)

  function automatic int popcount(longint unsigned v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

  // floor(a / 2**s) for signed a
  function automatic int fdiv(int a, int s);
    int k;
    k = 1 << s;
    if (a >= 0) return a / k;
    return -((-a + k - 1) / k);
  endfunction

  // census of an explicit window (row-major, MSB first, neighbour > centre)
  function automatic longint unsigned census_win(int win[][], int n);
    longint unsigned v = 0;
    int c = n / 2;
    for (int r = 0; r < n; r++)
      for (int q = 0; q < n; q++)
        if (!(r == c && q == c)) v = (v << 1) | longint'(win[r][q] > win[c][c]);
    return v;
  endfunction

  // one SGM step for all disparities
  function automatic void agg(input int lprev[], input int c[], input int p1, input int p2,
                              output int l[]);
    int d_n = lprev.size();
    int mn = lprev[0];
    foreach (lprev[i]) if (lprev[i] < mn) mn = lprev[i];
    l = new[d_n];
    for (int d = 0; d < d_n; d++) begin
      int best, src;
      best = lprev[d]; src = 0;
      if (d > 0        && lprev[d-1] + p1 < best) begin best = lprev[d-1] + p1; src = 1; end
      if (d < d_n - 1  && lprev[d+1] + p1 < best) begin best = lprev[d+1] + p1; src = 1; end
      if (mn + p2 < best) begin best = mn + p2; src = 2; end
      if (src == 1) cnt_p1++;
      if (src == 2) cnt_p2++;
      l[d] = c[d] + best - mn;
      if (l[d] > 255) l[d] = 255;
    end
  endfunction

  // previous-pixel estimate for pixel k (0..3) of a word
  function automatic int est(int k, int l, int c1, int c2, int c3, int lg);
    case (k)
      0: return l;
      1: return l + fdiv(c1 - l, lg);
      2: return l + fdiv((c1 + c2) / 2 - l, lg);
      default: return l + fdiv((c1 + c2) / 4 + (c3 / 2 - l), lg);
    endcase
  endfunction

  class sgm_model;
    int W, H, D, LG, P1, P2;
    byte unsigned b[][];            // base image [y][x]
    byte unsigned m[][];            // reference image [y][x]
    longint unsigned hist[$];       // reference census, last D pixels of the stream
    int C[][];                      // current row matching costs [x][d]
    int L[4][][];                   // current row path costs [path][x][d]
    int Lp[4][][];                  // previous row path costs
    int S[][];
    int disp[];

    function new(int w, int h, int dr, int lg, int p1, int p2);
      W = w; H = h; D = dr; LG = lg; P1 = p1; P2 = p2;
      b = new[H]; m = new[H];
      foreach (b[y]) begin b[y] = new[W]; m[y] = new[W]; end
      C = new[W]; S = new[W]; disp = new[W];
      foreach (C[x]) begin C[x] = new[D]; S[x] = new[D]; end
      for (int r = 0; r < 4; r++) begin
        L[r] = new[W]; Lp[r] = new[W];
        foreach (L[r][x]) begin L[r][x] = new[D]; Lp[r][x] = new[D]; end
      end
    endfunction

    // census of the window whose bottom-right pixel is (x, y)
    function longint unsigned census_at(bit is_ref, int x, int y);
      int win[][];
      win = new[WINM];
      foreach (win[r]) begin
        win[r] = new[WINM];
        foreach (win[r][q]) begin
          int yy = y - (WINM-1) + r, xx = x - (WINM-1) + q;
          if (yy < 0 || xx < 0) win[r][q] = 0;
          else win[r][q] = is_ref ? int'(m[yy][xx]) : int'(b[yy][xx]);
        end
      end
      return census_win(win, WINM);
    endfunction

    // matching costs of row y (stream order; updates the reference history)
    function void row_costs(int y);
      for (int x = 0; x < W; x++) begin
        longint unsigned cb;
        cb = census_at(0, x, y);
        hist.push_front(census_at(1, x, y));
        if (hist.size() > D) void'(hist.pop_back());
        for (int d = 0; d < D; d++)
          C[x][d] = $countones(cb ^ ((d < hist.size()) ? hist[d] : 64'd0));
      end
    endfunction

    // path costs of row y from C (paths 0, 45, 90, 135 degrees)
    function void row_paths(int y);
      int zero[], pv[], cc[], lo[];
      zero = new[D];
      foreach (zero[i]) zero[i] = 0;
      for (int r = 0; r < 4; r++) foreach (L[r][x]) Lp[r][x] = L[r][x];
      for (int x = 0; x < W; x++) begin
        int k = x % 4;
        cc = C[x];
        // 0 degrees: estimate from the last pixel of the previous word
        pv = new[D];
        for (int d = 0; d < D; d++) begin
          int last = (x < 4) ? 0 : L[0][x - k - 1][d];
          pv[d] = est(k, last, C[x-k][d], (k > 1) ? C[x-k+1][d] : 0,
                      (k > 2) ? C[x-k+2][d] : 0, LG);
          if (pv[d] != last) cnt_est++;
        end
        agg(pv, cc, P1, P2, lo); L[0][x] = lo;
        // 45, 90, 135 degrees: predecessor on the previous row
        for (int r = 1; r < 4; r++) begin
          int xp = x + (r - 2);
          if (y == 0 || xp < 0 || xp >= W) pv = zero; else pv = Lp[r][xp];
          agg(pv, cc, P1, P2, lo); L[r][x] = lo;
        end
      end
    endfunction

    function void row_select();
      for (int x = 0; x < W; x++) begin
        int best = 0;
        for (int d = 0; d < D; d++) begin
          S[x][d] = L[0][x][d] + L[1][x][d] + L[2][x][d] + L[3][x][d];
          if (S[x][d] < S[x][best]) best = d;
        end
        disp[x] = best;
      end
    endfunction
  endclass

endpackage
