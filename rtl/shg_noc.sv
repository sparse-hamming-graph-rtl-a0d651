// shg_noc -- sparse Hamming graph network-on-chip, top level.
//
// What it does: connects an R x C grid of tiles. Every tile has one router
// (shg_router) and one network interface (shg_ni) through which the tile's
// endpoints inject and receive flits. The routers are wired as a sparse
// Hamming graph: the 2D mesh, plus in every row a link between columns i and
// i+x for each x in S_R, plus in every column a link between rows i and i+x for
// each x in S_C. With S_R and S_C empty the network is a mesh; with every
// length present it is a flattened butterfly. The defaults are the main
// evaluated configuration, 64 tiles with S_R = {4}, S_C = {2,5}, laid out here
// as 8 x 8 (the grid shape is this design's reading of "64 tiles"), 512-bit
// links, 8 virtual channels, 32-flit buffers.
//
// How it works: every bidirectional link of the graph is two shg_link
// instances, one per direction, each carrying flits forward and credits back.
// Links are pipelined: a link spanning d tiles gets d * LINK_CYC_PER_TILE
// register stages (at least one), following the rule that a long link gets as
// many stages as the clock frequency requires. The cycles per tile are a
// parameter because they depend on tile size, wire delay and frequency, which
// the source does not give numerically. Router ports at the grid edge that
// have no link are tied off.
//
// Interface: per tile t = row*C + col, inj_valid/inj_ready/inj_flit inject a
// flit (its header holds destination and source tile) and
// ej_valid/ej_ready/ej_flit deliver one. evt_* pulse per router when a queued
// flit waits for credits or a request loses switch allocation.
//
// Timing, empty network: a flit accepted at tile A in cycle t appears on
// ej_valid at tile B in cycle t + 3 + sum over the hops of (link latency + 1).
module shg_noc
  import shg_pkg::*;
#(
  parameter int unsigned R                 = DEF_R,
  parameter int unsigned C                 = DEF_C,
  parameter logic [63:0] SR_MASK           = DEF_SR_MASK,
  parameter logic [63:0] SC_MASK           = DEF_SC_MASK,
  parameter int unsigned NUM_VC            = DEF_NUM_VC,
  parameter int unsigned DEPTH             = DEF_DEPTH,
  parameter int unsigned LINK_CYC_PER_TILE = 1,
  localparam int unsigned NT               = R * C
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inj_valid [NT],
  output logic  inj_ready [NT],
  input  flit_t inj_flit  [NT],
  output logic  ej_valid  [NT],
  input  logic  ej_ready  [NT],
  output flit_t ej_flit   [NT],
  output logic  evt_credit_stall [NT],
  output logic  evt_sa_conflict  [NT]
);

  localparam int unsigned NP = num_ports(SR_MASK, SC_MASK);

  flit_ch_t   rin   [NT][NP];   // router input channels
  flit_ch_t   rout  [NT][NP];   // router output channels
  credit_ch_t cup   [NT][NP];   // credits leaving a router input upstream
  credit_ch_t cdn   [NT][NP];   // credits arriving at a router output
  flit_ch_t   ldn   [NT][NP];   // far end of the link leaving (tile, port)

  for (genvar r = 0; r < int'(R); r++) begin : g_row
    for (genvar c = 0; c < int'(C); c++) begin : g_col
      localparam int T = r * int'(C) + c;

      shg_router #(
        .R(R), .C(C), .SR_MASK(SR_MASK), .SC_MASK(SC_MASK), .NUM_VC(NUM_VC), .DEPTH(DEPTH)
      ) u_router (
        .clk, .rst_n,
        .my_row          (coord_t'(r)),
        .my_col          (coord_t'(c)),
        .in_ch           (rin[T]),
        .credit_up       (cup[T]),
        .out_ch          (rout[T]),
        .credit_dn       (cdn[T]),
        .evt_credit_stall(evt_credit_stall[T]),
        .evt_sa_conflict (evt_sa_conflict[T])
      );

      shg_ni #(.DEPTH(DEPTH)) u_ni (
        .clk, .rst_n,
        .inj_valid         (inj_valid[T]),
        .inj_ready         (inj_ready[T]),
        .inj_flit          (inj_flit[T]),
        .ej_valid          (ej_valid[T]),
        .ej_ready          (ej_ready[T]),
        .ej_flit           (ej_flit[T]),
        .to_router         (rin[T][0]),
        .credit_from_router(cup[T][0]),
        .from_router       (rout[T][0]),
        .credit_to_router  (cdn[T][0])
      );
      assign ldn[T][0] = '0;

      for (genvar p = 1; p < int'(NP); p++) begin : g_port
        localparam logic [40:0] PEER = port_peer(R, C, SR_MASK, SC_MASK, r, c, p);
        localparam int PT  = int'(PEER[31:24]) * int'(C) + int'(PEER[23:16]);
        localparam int PP  = int'(PEER[39:32]);
        localparam int LAT = (int'(PEER[7:0]) * int'(LINK_CYC_PER_TILE) > 0) ?
                             int'(PEER[7:0]) * int'(LINK_CYC_PER_TILE) : 1;
        if (PEER[40]) begin : g_link
          // Link from this tile's output p to the peer's input PP.
          shg_link #(.LATENCY(LAT)) u_link (
            .clk, .rst_n,
            .up_flit  (rout[T][p]),
            .dn_flit  (ldn[T][p]),
            .dn_credit(cup[PT][PP]),
            .up_credit(cdn[T][p])
          );
          assign rin[T][p] = ldn[PT][PP];
        end else begin : g_open
          assign ldn[T][p] = '0;
          assign rin[T][p] = '0;
          assign cdn[T][p] = '0;
        end
      end
    end
  end

endmodule
