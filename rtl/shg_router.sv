// shg_router -- input-queued virtual-channel router of one tile.
//
// What it does: each tile has one router; the tile's endpoints reach it through
// the local port 0, and every mesh link and skip link of the tile ends on a port
// of its own (numbering in shg_pkg). The router moves single-flit packets from
// its input queues to the output port chosen by the route unit, one flit per
// output and per input each cycle, under credit-based flow control. The
// evaluated routers are input-queued with 8 virtual channels and 32-flit
// buffers; those are the defaults of NUM_VC and DEPTH.
//
// How it works, per cycle:
//  0. On arrival, the route unit of the input port computes the flit's output
//     port at this router (hop-minimal, row first); the port is stored with
//     the flit in the input queue, so one route unit per port serves all VCs.
//  1. Every virtual channel (VC) of every input port with a flit at its head
//     presents that stored output port.
//  2. Output VC: a flit that has made h hops travels on VC h, so it leaves on
//     VC v+1 when it arrived on VC v (injected flits arrive on VC 0); flits to
//     the local port use VC 0 of the network interface. Because the hop count
//     only grows, no cycle of buffer dependences can form, so the network is
//     deadlock-free as long as its diameter is below NUM_VC (checked at
//     elaboration). This deadlock-avoidance scheme is this design's choice; the
//     source only names the VC count.
//  3. A head is eligible when the downstream buffer of its output VC has a
//     credit left. A round-robin arbiter per input picks one eligible VC, a
//     round-robin arbiter per output picks one of the inputs asking for it
//     (separable switch allocation).
//  4. The winners cross the crossbar: the flit appears combinationally on the
//     output port (the link or network interface registers it), the output's
//     credit counter for that VC is decremented, and a credit for the freed slot
//     goes back on the input's credit channel.
// Credits returned by the downstream buffers increment the counters; counters
// start at DEPTH after reset.
//
// Timing: a flit present on in_ch in cycle t is routed and written into its
// queue, and can leave on out_ch in cycle t+1 at the earliest (one cycle per
// router).
// Ports that have no link (grid edge) must be fed with no flits and no credits;
// the route unit never selects them.
module shg_router
  import shg_pkg::*;
#(
  parameter int unsigned R       = DEF_R,
  parameter int unsigned C       = DEF_C,
  parameter logic [63:0] SR_MASK = DEF_SR_MASK,
  parameter logic [63:0] SC_MASK = DEF_SC_MASK,
  parameter int unsigned NUM_VC  = DEF_NUM_VC,
  parameter int unsigned DEPTH   = DEF_DEPTH,
  localparam int unsigned NP     = num_ports(SR_MASK, SC_MASK)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     my_row,
  input  coord_t     my_col,
  // Flits arriving on each input port, credits going back upstream.
  input  flit_ch_t   in_ch     [NP],
  output credit_ch_t credit_up [NP],
  // Flits leaving on each output port, credits coming back from downstream.
  output flit_ch_t   out_ch    [NP],
  input  credit_ch_t credit_dn [NP],
  // Event pulses for performance counting.
  output logic       evt_credit_stall,
  output logic       evt_sa_conflict
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);
  localparam int unsigned AVW   = $clog2(NUM_VC + 1);
  localparam int unsigned APW   = $clog2(NP + 1);
  localparam int unsigned PIW   = $clog2(NP);

  // Elaboration check: hop-indexed VCs need diameter < NUM_VC.
  localparam int unsigned DIAM = diameter_1d(C, SR_MASK) + diameter_1d(R, SC_MASK);
  if (DIAM >= NUM_VC) begin : g_diam_check
    $error("shg_router: network diameter %0d needs more than %0d virtual channels", DIAM, NUM_VC);
  end
  if (NUM_VC > (1 << VC_W)) begin : g_vc_check
    $error("shg_router: NUM_VC exceeds the VC field width");
  end

  logic  head_valid [NP][NUM_VC];
  flit_t head_flit  [NP][NUM_VC];
  port_t route      [NP][NUM_VC];
  vc_t   ovc        [NP][NUM_VC];
  logic  overflow   [NP];

  logic [CNT_W-1:0] cred [NP][NUM_VC];

  logic [NUM_VC-1:0] elig     [NP];
  logic              in_req   [NP];
  logic [AVW-1:0]    in_sel   [NP];
  port_t             in_port  [NP];
  logic              in_won   [NP];
  logic [NP-1:0]     out_req  [NP];
  logic              out_gnt  [NP];
  logic [APW-1:0]    out_idx  [NP];

  port_t in_route [NP];

  for (genvar p = 0; p < int'(NP); p++) begin : g_in
    shg_route_unit #(.R(R), .C(C), .SR_MASK(SR_MASK), .SC_MASK(SC_MASK)) u_rt (
      .my_row, .my_col,
      .dst_row (in_ch[p].flit.dst_row),
      .dst_col (in_ch[p].flit.dst_col),
      .out_port(in_route[p])
    );

    shg_vc_buffer #(.NUM_VC(NUM_VC), .DEPTH(DEPTH), .SIDE_W($bits(port_t))) u_buf (
      .clk, .rst_n,
      .wr_valid  (in_ch[p].valid),
      .wr_vc     (in_ch[p].vc),
      .wr_flit   (in_ch[p].flit),
      .wr_side   (in_route[p]),
      .rd_valid  (in_won[p]),
      .rd_vc     (vc_t'(in_sel[p])),
      .head_valid(head_valid[p]),
      .head_flit (head_flit[p]),
      .head_side (route[p]),
      .overflow  (overflow[p])
    );

    for (genvar v = 0; v < int'(NUM_VC); v++) begin : g_vc
      assign ovc[p][v] = (route[p][v] == '0) ? vc_t'(0) : vc_t'(v + 1);
      always_comb begin
        elig[p][v] = 1'b0;
        if (head_valid[p][v] && int'(route[p][v]) < int'(NP) && int'(ovc[p][v]) < int'(NUM_VC))
          elig[p][v] = (cred[PIW'(route[p][v])][ovc[p][v]] != '0);
      end
    end

    shg_rr_arbiter #(.N(NUM_VC)) u_in_arb (
      .clk, .rst_n,
      .req      (elig[p]),
      .advance  (in_won[p]),
      .gnt_valid(in_req[p]),
      .gnt_idx  (in_sel[p])
    );
    assign in_port[p] = route[p][in_sel[p][VC_W-1:0]];
  end

  // Output side: collect the requests, arbitrate, drive the crossbar.
  always_comb begin
    for (int o = 0; o < int'(NP); o++)
      for (int p = 0; p < int'(NP); p++)
        out_req[o][p] = in_req[p] && (int'(in_port[p]) == o);
  end

  for (genvar o = 0; o < int'(NP); o++) begin : g_out
    shg_rr_arbiter #(.N(NP)) u_out_arb (
      .clk, .rst_n,
      .req      (out_req[o]),
      .advance  (1'b1),
      .gnt_valid(out_gnt[o]),
      .gnt_idx  (out_idx[o])
    );

    always_comb begin
      out_ch[o] = '0;
      if (out_gnt[o]) begin
        out_ch[o].valid = 1'b1;
        out_ch[o].vc    = ovc[out_idx[o]][in_sel[out_idx[o]][VC_W-1:0]];
        out_ch[o].flit  = head_flit[out_idx[o]][in_sel[out_idx[o]][VC_W-1:0]];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < int'(NP); p++) begin
      in_won[p]          = in_req[p] && out_gnt[PIW'(in_port[p])] && (int'(out_idx[PIW'(in_port[p])]) == p);
      credit_up[p].valid = in_won[p];
      credit_up[p].vc    = vc_t'(in_sel[p]);
    end
  end

  // Credit counters: one per output port and VC.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < int'(NP); o++)
        for (int v = 0; v < int'(NUM_VC); v++)
          cred[o][v] <= CNT_W'(DEPTH);
    end else begin
      for (int o = 0; o < int'(NP); o++) begin
        for (int v = 0; v < int'(NUM_VC); v++) begin
          logic inc, dec;
          inc = credit_dn[o].valid && (credit_dn[o].vc == vc_t'(v));
          dec = out_ch[o].valid && (out_ch[o].vc == vc_t'(v));
          if (inc && !dec)      cred[o][v] <= cred[o][v] + CNT_W'(1);
          else if (dec && !inc) cred[o][v] <= cred[o][v] - CNT_W'(1);
        end
      end
    end
  end

  // Events: a queued flit waits for credits; a request lost output arbitration.
  always_comb begin
    evt_credit_stall = 1'b0;
    evt_sa_conflict  = 1'b0;
    for (int p = 0; p < int'(NP); p++) begin
      for (int v = 0; v < int'(NUM_VC); v++)
        if (head_valid[p][v] && !elig[p][v]) evt_credit_stall = 1'b1;
      if (in_req[p] && !in_won[p]) evt_sa_conflict = 1'b1;
    end
  end

  // Credit flow control must keep every input queue from overflowing.
  for (genvar p = 0; p < int'(NP); p++) begin : g_ovf_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !overflow[p])
      else $error("shg_router: input queue overflow on port %0d", p);
  end

  // A credit may only return for a VC whose counter is below DEPTH (or that
  // spends a credit in the same cycle).
  for (genvar o = 0; o < int'(NP); o++) begin : g_cred_chk
    a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
      credit_dn[o].valid |-> (int'(credit_dn[o].vc) < int'(NUM_VC) &&
                              (cred[o][credit_dn[o].vc] != CNT_W'(DEPTH) ||
                               (out_ch[o].valid && out_ch[o].vc == credit_dn[o].vc))))
      else $error("shg_router: credit returned to a full counter");
  end

endmodule
