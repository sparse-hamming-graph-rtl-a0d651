// shg_pkg -- types, constants and elaboration-time topology functions shared by
// the sparse Hamming graph network-on-chip.
//
// A sparse Hamming graph on an R x C grid of tiles is a 2D mesh plus, in every
// row, a link between the tiles in columns i and i+x for every x in the set S_R,
// and, in every column, a link between the tiles in rows i and i+x for every x in
// the set S_C. Both sets are carried here as bit masks: bit x of SR_MASK set
// means x is in S_R. Because every row (column) gets the same links, the graph
// is the Cartesian product of one "row graph" (C nodes) and one "column graph"
// (R nodes); the functions below work on such a 1D graph of N nodes with link
// lengths {1} U S.
//
// Port numbering of a router (a design choice, the source only draws ports on
// the faces of a tile): port 0 is the local port. The link lengths of a
// dimension are listed in ascending order, L_0 = 1 (the mesh link), L_1.. = the
// members of S. Row slot s = 2k+d addresses length L_k towards higher column
// indices (d = 0) or lower ones (d = 1); router port 1+s. Column slots follow
// the same rule and sit at router ports 1+2*NL_R+s. A slot whose neighbour would
// lie outside the grid has no link.
//
// Flit: one flit per packet, destination and source tile in a header next to a
// DATA_W-bit payload. DATA_W = 512 is the per-link bandwidth B of the
// evaluated architecture (bits per cycle); the header width is this design's.
package shg_pkg;

  // Link bandwidth B in bits per cycle (paper: 512 bits/cycle per link).
  localparam int unsigned DATA_W = 512;
  // Widest supported grid dimension and virtual-channel count.
  localparam int unsigned COORD_W = 8;
  localparam int unsigned MAX_DIM = 64;
  localparam int unsigned VC_W    = 3;
  // Main configuration, scenario a): 64 tiles as 8 x 8, S_R = {4}, S_C = {2,5}.
  localparam int unsigned DEF_R       = 8;
  localparam int unsigned DEF_C       = 8;
  localparam logic [63:0] DEF_SR_MASK = 64'h10;  // {4}
  localparam logic [63:0] DEF_SC_MASK = 64'h24;  // {2,5}
  localparam int unsigned DEF_NUM_VC  = 8;
  localparam int unsigned DEF_DEPTH   = 32;

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [VC_W-1:0]    vc_t;
  typedef logic [7:0]         port_t;

  typedef struct packed {
    coord_t              dst_row;
    coord_t              dst_col;
    coord_t              src_row;
    coord_t              src_col;
    logic [DATA_W-1:0]   data;
  } flit_t;

  // Forward half of a link: one flit with the virtual channel it occupies downstream.
  typedef struct packed {
    logic  valid;
    vc_t   vc;
    flit_t flit;
  } flit_ch_t;

  // Backward half of a link: one freed buffer slot of a virtual channel.
  typedef struct packed {
    logic valid;
    vc_t  vc;
  } credit_ch_t;

  localparam logic [7:0] NO_HOP = 8'hFF;

  // Number of link lengths of one dimension: the mesh link plus |S|.
  function automatic int unsigned num_lens(input logic [63:0] mask);
    int unsigned n;
    n = 1;
    for (int x = 2; x < 64; x++) if (mask[x]) n++;
    return n;
  endfunction

  function automatic int unsigned num_ports(input logic [63:0] sr_mask, input logic [63:0] sc_mask);
    return 1 + 2 * num_lens(sr_mask) + 2 * num_lens(sc_mask);
  endfunction

  // Link lengths of a dimension in ascending order, entry k = L_k.
  typedef logic [15:0][7:0] lens_t;

  function automatic lens_t len_list(input logic [63:0] mask);
    lens_t l;
    int unsigned n;
    l = '0;
    l[0] = 8'd1;
    n = 1;
    for (int x = 2; x < 64; x++) begin
      if (mask[x] && n < 16) begin
        l[n] = 8'(x);
        n++;
      end
    end
    return l;
  endfunction

  // Neighbour of node u through slot s in a 1D graph of n nodes, or -1 if none.
  function automatic int slot_neighbour(input int unsigned n, input lens_t lens,
                                        input int u, input int unsigned s);
    int v;
    v = (s % 2 == 0) ? u + int'(lens[s / 2]) : u - int'(lens[s / 2]);
    if (v < 0 || v >= int'(n)) v = -1;
    return v;
  endfunction

  // Hop distances from every node to node dst in the 1D graph (Bellman-Ford).
  function automatic logic [MAX_DIM-1:0][7:0] hop_dist(input int unsigned n, input logic [63:0] mask,
                                                        input int dst);
    logic [MAX_DIM-1:0][7:0] d;
    lens_t lens;
    int v;
    int unsigned nl;
    logic changed;
    nl = num_lens(mask);
    lens = len_list(mask);
    for (int u = 0; u < MAX_DIM; u++) d[u] = 8'hFF;
    d[dst] = 8'd0;
    changed = 1'b1;
    for (int it = 0; it < int'(n) && changed; it++) begin
      changed = 1'b0;
      for (int u = 0; u < int'(n); u++) begin
        for (int s = 0; s < int'(2 * nl); s++) begin
          v = slot_neighbour(n, lens, u, s);
          if (v >= 0 && d[v] != 8'hFF && d[v] + 8'd1 < d[u]) begin
            d[u] = d[v] + 8'd1;
            changed = 1'b1;
          end
        end
      end
    end
    return d;
  endfunction

  // Next hop in a 1D graph: the slot of a hop-minimal next hop from cur
  // towards dst, NO_HOP if cur == dst. Among hop-minimal choices the neighbour
  // physically closest to dst is taken (shortest remaining wire), then the
  // lowest slot.
  function automatic logic [7:0] next_hop(input int unsigned n, input logic [63:0] mask,
                                          input int cur, input int dst);
    logic [MAX_DIM-1:0][7:0] d;
    lens_t lens;
    int v;
    int best;
    int best_gap;
    int gap;
    int unsigned nl;
    nl = num_lens(mask);
    lens = len_list(mask);
    best = int'(NO_HOP);
    best_gap = 1 << 20;
    if (cur != dst && cur < int'(n) && dst < int'(n)) begin
      d = hop_dist(n, mask, dst);
      for (int s = 0; s < int'(2 * nl); s++) begin
        v = slot_neighbour(n, lens, cur, s);
        if (v >= 0 && d[v] + 8'd1 == d[cur]) begin
          gap = (v > dst) ? v - dst : dst - v;
          if (gap < best_gap) begin
            best = s;
            best_gap = gap;
          end
        end
      end
    end
    return best[7:0];
  endfunction

  // Largest hop distance (diameter) of the 1D graph.
  function automatic int unsigned diameter_1d(input int unsigned n, input logic [63:0] mask);
    logic [MAX_DIM-1:0][7:0] d;
    int unsigned m;
    m = 0;
    for (int dst = 0; dst < int'(n); dst++) begin
      d = hop_dist(n, mask, dst);
      for (int u = 0; u < int'(n); u++) if (int'(d[u]) > int'(m)) m = 32'(d[u]);
    end
    return m;
  endfunction

  // Far end of router port p of tile (r, c): {exists, peer port, peer row,
  // peer col, span in tiles}, packed as [40] [39:32] [31:24] [23:16] [7:0].
  function automatic logic [40:0] port_peer(input int unsigned nr, input int unsigned nc,
                                            input logic [63:0] sr_mask, input logic [63:0] sc_mask,
                                            input int r, input int c, input int p);
    logic [40:0] res;
    int unsigned nlr, nlc;
    int s, l, pr, pc, rp;
    lens_t lr, lc;
    nlr = num_lens(sr_mask);
    nlc = num_lens(sc_mask);
    lr  = len_list(sr_mask);
    lc  = len_list(sc_mask);
    res = '0;
    pr  = r;
    pc  = c;
    rp  = 0;
    l   = 0;
    if (p >= 1 && p < int'(1 + 2 * nlr)) begin
      s  = p - 1;
      l  = int'(lr[s / 2]);
      pc = (s % 2 == 0) ? c + l : c - l;
      rp = 1 + (s ^ 1);
    end else if (p >= int'(1 + 2 * nlr) && p < int'(1 + 2 * nlr + 2 * nlc)) begin
      s  = p - 1 - int'(2 * nlr);
      l  = int'(lc[s / 2]);
      pr = (s % 2 == 0) ? r + l : r - l;
      rp = 1 + int'(2 * nlr) + (s ^ 1);
    end
    if (l > 0 && pr >= 0 && pr < int'(nr) && pc >= 0 && pc < int'(nc)) begin
      res[40]    = 1'b1;
      res[39:32] = 8'(rp);
      res[31:24] = 8'(pr);
      res[23:16] = 8'(pc);
      res[7:0]   = 8'(l);
    end
    return res;
  endfunction

endpackage
