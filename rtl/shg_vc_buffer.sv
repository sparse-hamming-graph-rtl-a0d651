// shg_vc_buffer -- input queue of one router port: one FIFO per virtual channel.
//
// What it does: stores arriving flits in the FIFO of the virtual channel they
// arrive on and shows the oldest flit of every virtual channel at once, so the
// router can pick among them. The evaluated routers are input-queued with 8
// virtual channels and 32-flit buffers; this design reads "32-flit" as the
// depth of each virtual channel's FIFO (NUM_VC x DEPTH flits per port).
//
// How it works: a circular buffer per virtual channel with a read pointer, a
// write pointer and an occupancy count. At most one flit is written and one
// read per cycle (a router port receives one flit and sends one flit per
// cycle); write and read may hit the same or different channels.
//
// Next to each flit the queue keeps SIDE_W bits of side information written
// with it (the router stores the output port computed on arrival).
//
// Interface: wr_valid/wr_vc/wr_flit/wr_side write (the sender must hold a credit, so a
// write never finds its FIFO full: this is asserted); head_valid[v] and
// head_flit[v]/head_side[v] show the head of channel v; rd_valid/rd_vc remove that head.
// Timing: a flit written in cycle t is at the head from cycle t+1.
module shg_vc_buffer
  import shg_pkg::*;
#(
  parameter int unsigned NUM_VC = DEF_NUM_VC,
  parameter int unsigned DEPTH  = DEF_DEPTH,
  parameter int unsigned SIDE_W = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_valid,
  input  vc_t   wr_vc,
  input  flit_t wr_flit,
  input  logic [SIDE_W-1:0] wr_side,
  input  logic  rd_valid,
  input  vc_t   rd_vc,
  output logic  head_valid [NUM_VC],
  output flit_t head_flit  [NUM_VC],
  output logic [SIDE_W-1:0] head_side [NUM_VC],
  output logic  overflow
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);
  localparam int unsigned VIW   = (NUM_VC > 1) ? $clog2(NUM_VC) : 1;

  flit_t            mem   [NUM_VC][DEPTH];
  logic [SIDE_W-1:0] side [NUM_VC][DEPTH];
  logic [PTR_W-1:0] rd_ptr[NUM_VC];
  logic [PTR_W-1:0] wr_ptr[NUM_VC];
  logic [CNT_W-1:0] count [NUM_VC];

  function automatic logic [PTR_W-1:0] ptr_inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + PTR_W'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < int'(NUM_VC); v++) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end
    end else begin
      for (int v = 0; v < int'(NUM_VC); v++) begin
        logic wr_here, rd_here;
        wr_here = wr_valid && (wr_vc == vc_t'(v)) && (count[v] != CNT_W'(DEPTH));
        rd_here = rd_valid && (rd_vc == vc_t'(v)) && (count[v] != '0);
        if (wr_here) wr_ptr[v] <= ptr_inc(wr_ptr[v]);
        if (rd_here) rd_ptr[v] <= ptr_inc(rd_ptr[v]);
        if (wr_here && !rd_here)      count[v] <= count[v] + CNT_W'(1);
        else if (rd_here && !wr_here) count[v] <= count[v] - CNT_W'(1);
      end
    end
  end

  logic [VIW-1:0] wr_idx;
  logic           wr_ok;

  assign wr_idx = VIW'(wr_vc);
  assign wr_ok  = wr_valid && (int'(wr_vc) < int'(NUM_VC)) && (count[wr_idx] != CNT_W'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_ok) begin
      mem[wr_idx][wr_ptr[wr_idx]]  <= wr_flit;
      side[wr_idx][wr_ptr[wr_idx]] <= wr_side;
    end
  end

  always_comb begin
    for (int v = 0; v < int'(NUM_VC); v++) begin
      head_valid[v] = (count[v] != '0);
      head_flit[v]  = mem[v][rd_ptr[v]];
      head_side[v]  = side[v][rd_ptr[v]];
    end
  end

  // A write into a full FIFO means the sender broke the credit protocol.
  assign overflow = wr_valid && !wr_ok;

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) !overflow;
  endproperty
  a_no_overflow: assert property (p_no_overflow) else $error("shg_vc_buffer: write into a full virtual channel");

endmodule
