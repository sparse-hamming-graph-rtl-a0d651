// shg_route_unit -- next-hop selection of one router in a sparse Hamming graph.
//
// What it does: given the router's own tile (my_row, my_col) and a flit's
// destination tile, it returns the router output port that leads one hop
// further along a path with the fewest router-to-router hops.
//
// How it works: the topology is the Cartesian product of a row graph (C tiles,
// link lengths {1} U S_R) and a column graph (R tiles, lengths {1} U S_C), so a
// path that is hop-minimal in the row graph followed by one that is hop-minimal
// in the column graph is hop-minimal overall. The route unit therefore moves a
// flit along its row until it reaches the destination column and then along
// that column (row-first dimension order, this design's choice). The two next
// hop tables are computed at elaboration time from R, C and the two sets by
// shg_pkg::next_hop; at run time they are two table lookups. Among several
// hop-minimal next hops, the table takes the one that lands physically closest
// to the destination, in keeping with the goal of short physical paths.
//
// The sets S_R and S_C are bit masks (bit x set: x is in the set; the source
// allows 2 <= x < C for S_R and 2 <= x < R for S_C). Port numbering is
// described in shg_pkg: 0 local, then row slots, then column slots.
//
// Timing: purely combinational.
module shg_route_unit
  import shg_pkg::*;
#(
  parameter int unsigned R       = DEF_R,
  parameter int unsigned C       = DEF_C,
  parameter logic [63:0] SR_MASK = DEF_SR_MASK,
  parameter logic [63:0] SC_MASK = DEF_SC_MASK
) (
  input  coord_t my_row,
  input  coord_t my_col,
  input  coord_t dst_row,
  input  coord_t dst_col,
  output port_t  out_port
);

  localparam int unsigned NL_R = num_lens(SR_MASK);

  // Next-hop tables, one entry per (current, destination) pair of a dimension.
  logic [7:0] row_tab [C][C];
  logic [7:0] col_tab [R][R];

  for (genvar i = 0; i < int'(C); i++) begin : g_rt
    for (genvar j = 0; j < int'(C); j++) begin : g_e
      localparam logic [7:0] SLOT = next_hop(C, SR_MASK, i, j);
      assign row_tab[i][j] = SLOT;
    end
  end
  for (genvar i = 0; i < int'(R); i++) begin : g_ct
    for (genvar j = 0; j < int'(R); j++) begin : g_e
      localparam logic [7:0] SLOT = next_hop(R, SC_MASK, i, j);
      assign col_tab[i][j] = SLOT;
    end
  end

  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;

  logic [7:0] row_slot, col_slot;

  assign row_slot = (int'(my_col) < int'(C) && int'(dst_col) < int'(C)) ?
                    row_tab[CW'(my_col)][CW'(dst_col)] : NO_HOP;
  assign col_slot = (int'(my_row) < int'(R) && int'(dst_row) < int'(R)) ?
                    col_tab[RW'(my_row)][RW'(dst_row)] : NO_HOP;

  always_comb begin
    if (dst_col != my_col)      out_port = port_t'(1) + port_t'(row_slot);
    else if (dst_row != my_row) out_port = port_t'(1 + 2 * NL_R) + port_t'(col_slot);
    else                        out_port = '0;
  end

endmodule
