// nrank_model -- behavioural model of N-Rank, the offline weight extraction.
//
// N-Rank is not hardware: it runs offline whenever the expected traffic
// changes, and its output, one NR-weight per node, is what the route-choice
// calculator turns into bitmaps. This package lets testbenches derive weights
// for a traffic pattern. It follows the evolutionary model of the Q-StaR
// paper on a 2D mesh:
//   - T[s][d] is the fraction of all traffic going from node s to node d
//     (normalised here so that it sums to 1);
//   - a pair (s,d) can use the channel u->n if the channel lies in the minimum
//     rectangle of s and d and points towards d (no detours): W(u,n) sums T
//     over those pairs, Wdrn(u,n) over those with d = n;
//   - p(u,n) = W(u,n) / sum of W(u,n') over u's downstream nodes n',
//     pdrn(u,n) = Wdrn(u,n) / W(u,n) (0 where the denominator is 0);
//   - start: w(n) = wNR(n) = sum over d of T[n][d];
//   - each iteration: wNR(n) += sum over upstream u of w(u) p(u,n);
//     w(n) = sum over u of w(u) p(u,n) (1 - pdrn(u,n));
//   - stop when the total w falls below 0.01 or after 100 iterations.
package nrank_model;

  localparam int MAXN = 64;

  typedef real mat_t [MAXN][MAXN];
  typedef real vec_t [MAXN];

  // does the pair (s,d) possibly use channel u->n without detouring?
  function automatic bit uses(int mx, int s, int d, int u, int n);
    int sx, sy, dx, dy, ux, uy, nx, ny;
    sx = s % mx; sy = s / mx; dx = d % mx; dy = d / mx;
    ux = u % mx; uy = u / mx; nx = n % mx; ny = n / mx;
    if (ny == uy) begin
      // horizontal channel: the row must lie in the rectangle
      if (uy < ((sy < dy) ? sy : dy) || uy > ((sy > dy) ? sy : dy)) return 0;
      if (nx > ux) return (sx <= ux) && (dx >= nx);   // eastwards
      else         return (sx >= ux) && (dx <= nx);   // westwards
    end else begin
      if (ux < ((sx < dx) ? sx : dx) || ux > ((sx > dx) ? sx : dx)) return 0;
      if (ny > uy) return (sy <= uy) && (dy >= ny);   // southwards
      else         return (sy >= uy) && (dy <= ny);   // northwards
    end
  endfunction

  function automatic bit adjacent(int mx, int u, int n);
    int ux, uy, nx, ny, ddx, ddy;
    ux = u % mx; uy = u / mx; nx = n % mx; ny = n / mx;
    ddx = (ux > nx) ? ux - nx : nx - ux;
    ddy = (uy > ny) ? uy - ny : ny - uy;
    return (ddx + ddy) == 1;
  endfunction

  // Returns the NR-weights; iterations gets the number of iterations run.
  function automatic vec_t nrank(int mx, int my, mat_t t_in, output int iterations);
    int    nn;
    real   tot;
    mat_t  t, p, pd;
    vec_t  w, wnr, wn, out_sum;
    nn = mx * my;
    tot = 0.0;
    for (int s = 0; s < nn; s++) for (int d = 0; d < nn; d++) tot += t_in[s][d];
    for (int s = 0; s < nn; s++) for (int d = 0; d < nn; d++) t[s][d] = (tot > 0.0) ? t_in[s][d] / tot : 0.0;
    // W and Wdrn per channel
    for (int u = 0; u < nn; u++) begin
      out_sum[u] = 0.0;
      for (int n = 0; n < nn; n++) begin
        real wt, wd;
        wt = 0.0; wd = 0.0;
        if (adjacent(mx, u, n)) begin
          for (int s = 0; s < nn; s++)
            for (int d = 0; d < nn; d++)
              if (uses(mx, s, d, u, n)) begin
                wt += t[s][d];
                if (d == n) wd += t[s][d];
              end
        end
        p[u][n]  = wt;
        pd[u][n] = (wt > 0.0) ? wd / wt : 0.0;
        out_sum[u] += wt;
      end
    end
    for (int u = 0; u < nn; u++)
      for (int n = 0; n < nn; n++)
        p[u][n] = (out_sum[u] > 0.0) ? p[u][n] / out_sum[u] : 0.0;
    // evolution
    for (int n = 0; n < nn; n++) begin
      w[n] = 0.0;
      for (int d = 0; d < nn; d++) w[n] += t[n][d];
      wnr[n] = w[n];
    end
    iterations = 0;
    while (iterations < 100) begin
      real sum;
      sum = 0.0;
      for (int n = 0; n < nn; n++) sum += w[n];
      if (sum < 0.01) break;
      for (int n = 0; n < nn; n++) begin
        wn[n] = 0.0;
        for (int u = 0; u < nn; u++) begin
          if (p[u][n] > 0.0) begin
            wnr[n] += w[u] * p[u][n];
            wn[n]  += w[u] * p[u][n] * (1.0 - pd[u][n]);
          end
        end
      end
      for (int n = 0; n < nn; n++) w[n] = wn[n];
      iterations++;
    end
    return wnr;
  endfunction

endpackage
