// shg_ni -- network interface between a tile's endpoints and its local router port.
//
// What it does: the source attaches all endpoints of a tile to the tile's
// local router; this block is that attachment point. Injection: the endpoint
// offers a flit with a valid/ready handshake; the interface accepts it only
// while it holds a credit for VC 0 of the router's local input queue, and
// registers it onto the router's local input. Ejection: flits the router sends
// to the local port land in a DEPTH-deep queue; the endpoint drains it with a
// valid/ready handshake and every drained flit returns a credit to the router.
// The handshake and the queue are this design's choices; the source only says
// that endpoints connect to the local router.
//
// Timing: a flit accepted in cycle t is on to_router in cycle t+1. A flit on
// from_router in cycle t is offered on ej_* from cycle t+1. inj_ready depends
// only on the credit counter (registers).
module shg_ni
  import shg_pkg::*;
#(
  parameter int unsigned DEPTH = DEF_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  // Endpoint side.
  input  logic       inj_valid,
  output logic       inj_ready,
  input  flit_t      inj_flit,
  output logic       ej_valid,
  input  logic       ej_ready,
  output flit_t      ej_flit,
  // Router side (local port 0).
  output flit_ch_t   to_router,
  input  credit_ch_t credit_from_router,
  input  flit_ch_t   from_router,
  output credit_ch_t credit_to_router
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [CNT_W-1:0] credits;
  logic             inj_q_valid;
  flit_t            inj_q_flit;
  logic             inj_fire;
  logic             ej_fire;
  logic             head_valid [1];
  flit_t            head_flit  [1];
  logic [0:0]       head_side  [1];
  logic             ej_overflow;

  assign inj_ready = (credits != '0);
  assign inj_fire  = inj_valid && inj_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits     <= CNT_W'(DEPTH);
      inj_q_valid <= 1'b0;
    end else begin
      inj_q_valid <= inj_fire;
      if (inj_fire && !credit_from_router.valid)      credits <= credits - CNT_W'(1);
      else if (!inj_fire && credit_from_router.valid) credits <= credits + CNT_W'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (inj_fire) inj_q_flit <= inj_flit;
  end

  assign to_router = '{valid: inj_q_valid, vc: '0, flit: inj_q_flit};

  shg_vc_buffer #(.NUM_VC(1), .DEPTH(DEPTH), .SIDE_W(1)) u_ej_q (
    .clk, .rst_n,
    .wr_valid  (from_router.valid),
    .wr_vc     (from_router.vc),
    .wr_flit   (from_router.flit),
    .wr_side   (1'b0),
    .rd_valid  (ej_fire),
    .rd_vc     ('0),
    .head_valid(head_valid),
    .head_flit (head_flit),
    .head_side (head_side),
    .overflow  (ej_overflow)
  );

  assign ej_valid = head_valid[0];
  assign ej_flit  = head_flit[0];
  assign ej_fire  = ej_valid && ej_ready;

  assign credit_to_router.valid = ej_fire;
  assign credit_to_router.vc    = '0;

  a_ej_vc0: assert property (@(posedge clk) disable iff (!rst_n)
    from_router.valid |-> from_router.vc == '0) else $error("shg_ni: ejected flit not on VC 0");
  a_inj_credit: assert property (@(posedge clk) disable iff (!rst_n)
    credit_from_router.valid |-> credits != CNT_W'(DEPTH)) else $error("shg_ni: credit overflow");
  a_ej_room: assert property (@(posedge clk) disable iff (!rst_n) !ej_overflow)
    else $error("shg_ni: ejection queue overflow");

endmodule
