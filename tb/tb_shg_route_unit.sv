// tb_shg_route_unit -- checks hop-minimal, row-first next-hop selection.
//
// The testbench builds the sparse Hamming graph on its own, link by link, from
// the construction rule (mesh links plus, per row, tile i to tile i+x for every
// x in S_R and, per column, tile i to tile i+x for every x in S_C), computes all
// pairwise hop distances with Floyd-Warshall, and then checks for every pair of
// current and destination tile that the route unit's output port
//   * is the local port exactly when the flit has arrived,
//   * leads over an existing link to a tile one hop closer to the destination,
//   * stays in the row while the destination column is not yet reached.
// Two configurations are checked: the main 8 x 8 one (S_R = {4}, S_C = {2,5})
// and the 3 x 6 example with S_R = {3,5}, S_C = {2}.
module tb_shg_route_unit;
  import shg_pkg::*;

  int checks   = 0;
  int failures = 0;

  coord_t my_row, my_col, dst_row, dst_col;
  port_t  port_a, port_b;

  shg_route_unit u_a (.my_row, .my_col, .dst_row, .dst_col, .out_port(port_a));
  shg_route_unit #(.R(3), .C(6), .SR_MASK(64'h28), .SC_MASK(64'h04)) u_b (
    .my_row, .my_col, .dst_row, .dst_col, .out_port(port_b));

  int hd [64][64];
  bit adj  [64][64];

  // Tile reached through port p under the documented numbering, -1 if none.
  function automatic int port_target(int nr, int nc, int sr[$], int sc[$], int r, int c, int p);
    int lr[$];
    int lc[$];
    int s;
    int tr;
    int tc;
    lr = {1};
    foreach (sr[i]) lr.push_back(sr[i]);
    lc = {1};
    foreach (sc[i]) lc.push_back(sc[i]);
    tr = r;
    tc = c;
    if (p == 0) return r * nc + c;
    s = p - 1;
    if (s < 2 * lr.size()) tc = (s % 2 == 0) ? c + lr[s / 2] : c - lr[s / 2];
    else begin
      s = s - 2 * lr.size();
      if (s >= 2 * lc.size()) return -1;
      tr = (s % 2 == 0) ? r + lc[s / 2] : r - lc[s / 2];
    end
    if (tr < 0 || tr >= nr || tc < 0 || tc >= nc) return -1;
    return tr * nc + tc;
  endfunction

  task automatic build(int nr, int nc, int sr[$], int sc[$]);
    int n;
    int xs[$];
    n = nr * nc;
    for (int a = 0; a < n; a++) for (int b = 0; b < n; b++) adj[a][b] = 0;
    // Row links: mesh (x = 1) and every x in S_R, columns i and i+x.
    xs = {1};
    foreach (sr[i]) xs.push_back(sr[i]);
    for (int r = 0; r < nr; r++)
      foreach (xs[k])
        for (int i = 0; i + xs[k] < nc; i++) begin
          adj[r*nc+i][r*nc+i+xs[k]] = 1;
          adj[r*nc+i+xs[k]][r*nc+i] = 1;
        end
    xs = {1};
    foreach (sc[i]) xs.push_back(sc[i]);
    for (int c = 0; c < nc; c++)
      foreach (xs[k])
        for (int i = 0; i + xs[k] < nr; i++) begin
          adj[i*nc+c][(i+xs[k])*nc+c] = 1;
          adj[(i+xs[k])*nc+c][i*nc+c] = 1;
        end
    for (int a = 0; a < n; a++)
      for (int b = 0; b < n; b++)
        hd[a][b] = (a == b) ? 0 : (adj[a][b] ? 1 : 1000);
    for (int k = 0; k < n; k++)
      for (int a = 0; a < n; a++)
        for (int b = 0; b < n; b++)
          if (hd[a][k] + hd[k][b] < hd[a][b]) hd[a][b] = hd[a][k] + hd[k][b];
  endtask

  task automatic check_all(int which, int nr, int nc, int sr[$], int sc[$], int exp_diam);
    int cur;
    int dst;
    int nxt;
    int p;
    int diam;
    build(nr, nc, sr, sc);
    diam = 0;
    for (int a = 0; a < nr * nc; a++)
      for (int b = 0; b < nr * nc; b++) if (hd[a][b] > diam) diam = hd[a][b];
    checks++;
    if (diam != exp_diam) begin
      failures++;
      $display("FAIL cfg %0d: diameter %0d, expected %0d", which, diam, exp_diam);
    end
    for (int r = 0; r < nr; r++)
      for (int c = 0; c < nc; c++)
        for (int dr = 0; dr < nr; dr++)
          for (int dc = 0; dc < nc; dc++) begin
            my_row  = coord_t'(r);
            my_col  = coord_t'(c);
            dst_row = coord_t'(dr);
            dst_col = coord_t'(dc);
            #1;
            p   = (which == 0) ? int'(port_a) : int'(port_b);
            cur = r * nc + c;
            dst = dr * nc + dc;
            nxt = port_target(nr, nc, sr, sc, r, c, p);
            checks++;
            if (cur == dst) begin
              if (p != 0) begin
                failures++;
                $display("FAIL cfg %0d: (%0d,%0d) to itself gave port %0d", which, r, c, p);
              end
            end else if (p == 0 || nxt < 0 || !adj[cur][nxt] || hd[nxt][dst] != hd[cur][dst] - 1
                         || (dc != c && nxt / nc != r)) begin
              failures++;
              $display("FAIL cfg %0d: (%0d,%0d)->(%0d,%0d) port %0d next %0d", which, r, c, dr, dc, p, nxt);
            end
          end
  endtask

  initial begin
    // 8 x 8, S_R = {4}, S_C = {2,5}. Row graph diameter 3 (e.g. 0 -> 3 or
    // 0 -> 7 need three hops), column graph diameter 2: total 5.
    check_all(0, 8, 8, '{4}, '{2, 5}, 5);
    // 3 x 6, S_R = {3,5}, S_C = {2}: rows diameter 2, columns 1: total 3.
    check_all(1, 3, 6, '{3, 5}, '{2}, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
