// tb_shg_noc -- end-to-end test of the sparse Hamming graph network on a
// reduced grid with the link sets of the main configuration: 6 x 5 tiles,
// S_R = {4}, S_C = {2,5}, 8 virtual channels, 4-flit buffers (so that credit
// back-pressure shows up quickly), 512-bit flits, one link stage per tile of
// span. The 8 x 8 default with 32-flit buffers is the same RTL with larger
// parameters; it is too large to compile for cycle simulation in reasonable
// time and is not simulated here.
//
// The testbench builds its own copy of the graph from the construction rule
// and its own model of the routing rule (row first; in each dimension a next
// hop on a path with the fewest hops, preferring the neighbour closest to the
// destination, then the shorter link, then the upward direction). From it, it
// predicts the path and the exact latency of a flit through the empty network:
// 3 cycles plus, per hop, the link latency (its span in tiles) plus one.
//
// Phase 1 sends isolated flits and checks delivery tile, payload and exact
// latency. Phase 2 offers uniform random traffic from every tile plus a
// hotspot whose endpoint stops draining for a while, then drains the network;
// every flit must arrive exactly once at its destination, intact.
// Mechanisms counted, each must occur: skip-link hops, multi-hop paths (VC
// class changes), credit stalls inside routers, switch-allocation conflicts,
// injection back-pressure (inj_ready low) and ejection back-pressure.
module tb_shg_noc;
  import shg_pkg::*;

  localparam int NR = 6, NC = 5, NT = NR * NC;

  int checks   = 0;
  int failures = 0;

  logic  clk = 0;
  logic  rst_n = 0;
  logic  inj_valid [NT];
  logic  inj_ready [NT];
  flit_t inj_flit  [NT];
  logic  ej_valid  [NT];
  logic  ej_ready  [NT];
  flit_t ej_flit   [NT];
  logic  evt_credit_stall [NT];
  logic  evt_sa_conflict  [NT];

  always #5 clk = ~clk;

  shg_noc #(.R(NR), .C(NC), .SR_MASK(64'h10), .SC_MASK(64'h24),
            .NUM_VC(8), .DEPTH(4)) dut (.*);

  // Routing model ------------------------------------------------------------
  int row_lens[$] = '{1, 4};
  int col_lens[$] = '{1, 2, 5};

  // Hop distance between positions a and b of a 1D graph with n nodes.
  function automatic int hops1d(int n, int lens[$], int a, int b);
    int d [64];
    bit changed;
    int v;
    foreach (d[i]) d[i] = 1000;
    d[b] = 0;
    changed = 1;
    while (changed) begin
      changed = 0;
      for (int u = 0; u < n; u++)
        foreach (lens[k])
          for (int s = -1; s <= 1; s += 2) begin
            v = u + s * lens[k];
            if (v >= 0 && v < n && d[v] + 1 < d[u]) begin
              d[u] = d[v] + 1;
              changed = 1;
            end
          end
    end
    return d[a];
  endfunction

  // Expected latency of an isolated flit; counts skip-link hops and hops.
  function automatic int path_latency(int sr, int sc, int dr, int dc, output int hops, output int skips);
    int lat;
    int cur;
    int best;
    int best_gap;
    int best_len;
    int v;
    int gap;
    lat = 3;
    hops = 0;
    skips = 0;
    cur = sc;
    while (cur != dc) begin
      best = -1; best_gap = 1000; best_len = 0;
      foreach (row_lens[k]) for (int s = 1; s >= -1; s -= 2) begin
        v = cur + s * row_lens[k];
        if (v >= 0 && v < NC && hops1d(NC, row_lens, v, dc) + 1 == hops1d(NC, row_lens, cur, dc)) begin
          gap = (v > dc) ? v - dc : dc - v;
          if (gap < best_gap) begin best = v; best_gap = gap; best_len = row_lens[k]; end
        end
      end
      lat += best_len + 1; hops++; if (best_len > 1) skips++;
      cur = best;
    end
    cur = sr;
    while (cur != dr) begin
      best = -1; best_gap = 1000; best_len = 0;
      foreach (col_lens[k]) for (int s = 1; s >= -1; s -= 2) begin
        v = cur + s * col_lens[k];
        if (v >= 0 && v < NR && hops1d(NR, col_lens, v, dr) + 1 == hops1d(NR, col_lens, cur, dr)) begin
          gap = (v > dr) ? v - dr : dr - v;
          if (gap < best_gap) begin best = v; best_gap = gap; best_len = col_lens[k]; end
        end
      end
      lat += best_len + 1; hops++; if (best_len > 1) skips++;
      cur = best;
    end
    return lat;
  endfunction

  // Scoreboard ---------------------------------------------------------------
  int cyc = 0;
  int inj_cyc  [int];
  int exp_tile [int];
  int next_id = 1;
  int delivered = 0;
  int skip_hops = 0, multi_hop = 0, stall_cycles = 0, conflict_cycles = 0;
  int inj_bp = 0, ej_bp = 0;
  int lat_checked = 0;

  function automatic flit_t make_flit(int id, int src, int dst);
    flit_t f;
    f = '0;
    f.src_row = coord_t'(src / NC);
    f.src_col = coord_t'(src % NC);
    f.dst_row = coord_t'(dst / NC);
    f.dst_col = coord_t'(dst % NC);
    f.data[31:0]    = id;
    f.data[63:32]   = $urandom;
    f.data[511:480] = ~id;
    return f;
  endfunction

  // Evaluate handshakes of the current cycle (call after inputs settled).
  task automatic observe(bit exact, output int lat_seen, output int id_seen);
    int id;
    lat_seen = -1;
    id_seen  = -1;
    for (int t = 0; t < NT; t++) begin
      if (inj_valid[t] && !inj_ready[t]) inj_bp++;
      if (ej_valid[t] && !ej_ready[t]) ej_bp++;
      if (evt_credit_stall[t]) stall_cycles++;
      if (evt_sa_conflict[t]) conflict_cycles++;
      if (ej_valid[t] && ej_ready[t]) begin
        id = int'(ej_flit[t].data[31:0]);
        checks++;
        if (!exp_tile.exists(id) || exp_tile[id] != t || ej_flit[t].data[511:480] != ~ej_flit[t].data[31:0]
            || int'(ej_flit[t].dst_row) * NC + int'(ej_flit[t].dst_col) != t) begin
          failures++;
          $display("FAIL flit %0d delivered at tile %0d (expected %0d)", id,
                   t, exp_tile.exists(id) ? exp_tile[id] : -1);
        end else begin
          lat_seen = cyc - inj_cyc[id];
          id_seen  = id;
          exp_tile.delete(id);
          delivered++;
        end
      end
    end
  endtask

  task automatic clear_inputs();
    for (int t = 0; t < NT; t++) begin
      inj_valid[t] = 0;
      inj_flit[t]  = '0;
      ej_ready[t]  = 1;
    end
  endtask

  initial begin
    int src, dst, id, lat, hops, skips, exp_lat, lat_seen, id_seen, waited;
    int hot;
    clear_inputs();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Phase 1: isolated flits, exact latency.
    for (int k = 0; k < 40; k++) begin
      if (k == 0) begin src = 0; dst = NT - 1; end
      else if (k == 1) begin src = 3 * NC + 0; dst = 3 * NC + 4; end
      else begin
        src = $urandom_range(NT - 1);
        dst = $urandom_range(NT - 1);
      end
      exp_lat = path_latency(src / NC, src % NC, dst / NC, dst % NC, hops, skips);
      @(negedge clk);
      id = next_id++;
      inj_valid[src] = 1;
      inj_flit[src]  = make_flit(id, src, dst);
      exp_tile[id]   = dst;
      #1;
      checks++;
      if (!inj_ready[src]) begin
        failures++;
        $display("FAIL inj_ready low on an empty network");
      end
      inj_cyc[id] = cyc;
      observe(1, lat_seen, id_seen);
      @(posedge clk);
      cyc++;
      @(negedge clk);
      inj_valid[src] = 0;
      waited = 0;
      lat_seen = -1;
      while (lat_seen < 0 && waited < 200) begin
        #1;
        observe(1, lat_seen, id_seen);
        @(posedge clk);
        cyc++;
        @(negedge clk);
        waited++;
      end
      checks++;
      if (lat_seen != exp_lat) begin
        failures++;
        $display("FAIL flit %0d (%0d,%0d)->(%0d,%0d): latency %0d, expected %0d", id,
                 src / NC, src % NC, dst / NC, dst % NC, lat_seen, exp_lat);
      end
      lat_checked++;
      skip_hops += skips;
      if (hops >= 2) multi_hop++;
    end

    // Phase 2: uniform random load plus a hotspot whose endpoint pauses.
    hot = 2 * NC + 3;
    for (int c = 0; c < 1200; c++) begin
      @(negedge clk);
      for (int t = 0; t < NT; t++) begin
        // Keep an offered flit until it is accepted (valid must stay up).
        if (!(inj_valid[t] && !inj_ready[t])) begin
          inj_valid[t] = 0;
          if (c < 1000 && $urandom_range(99) < 25) begin
            dst = ($urandom_range(99) < 15) ? hot : $urandom_range(NT - 1);
            id  = next_id++;
            inj_valid[t] = 1;
            inj_flit[t]  = make_flit(id, t, dst);
            exp_tile[id] = dst;
          end
        end
        ej_ready[t] = (t == hot && c > 100 && c < 500) ? 1'b0 : ($urandom_range(99) < 85);
      end
      #1;
      for (int t = 0; t < NT; t++)
        if (inj_valid[t] && inj_ready[t]) inj_cyc[int'(inj_flit[t].data[31:0])] = cyc;
      observe(0, lat_seen, id_seen);
      @(posedge clk);
      cyc++;
    end
    // Drain.
    @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      if (!(inj_valid[t] && !inj_ready[t])) inj_valid[t] = 0;
      ej_ready[t] = 1;
    end
    for (int c = 0; c < 3000 && exp_tile.num() != 0; c++) begin
      #1;
      for (int t = 0; t < NT; t++)
        if (inj_valid[t] && inj_ready[t]) inj_cyc[int'(inj_flit[t].data[31:0])] = cyc;
      observe(0, lat_seen, id_seen);
      @(posedge clk);
      cyc++;
      @(negedge clk);
      for (int t = 0; t < NT; t++) if (inj_valid[t] && inj_ready[t] === 1'b0) ; else inj_valid[t] = 0;
    end
    checks++;
    if (exp_tile.num() != 0) begin
      failures++;
      $display("FAIL %0d flits never delivered", exp_tile.num());
    end
    $display("flits %0d delivered %0d; latency-checked %0d", next_id - 1, delivered, lat_checked);
    $display("mechanisms: skip-link hops %0d, multi-hop flits %0d, credit-stall router-cycles %0d,",
             skip_hops, multi_hop, stall_cycles);
    $display("            allocation conflicts %0d, injection back-pressure %0d, ejection back-pressure %0d",
             conflict_cycles, inj_bp, ej_bp);
    checks++; if (skip_hops == 0)       begin failures++; $display("FAIL no skip-link hop"); end
    checks++; if (multi_hop == 0)       begin failures++; $display("FAIL no multi-hop flit"); end
    checks++; if (stall_cycles == 0)    begin failures++; $display("FAIL no credit stall"); end
    checks++; if (conflict_cycles == 0) begin failures++; $display("FAIL no allocation conflict"); end
    checks++; if (inj_bp == 0)          begin failures++; $display("FAIL no injection back-pressure"); end
    checks++; if (ej_bp == 0)           begin failures++; $display("FAIL no ejection back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
