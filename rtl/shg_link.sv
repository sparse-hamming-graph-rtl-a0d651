// shg_link -- one direction of a router-to-router link, pipelined.
//
// What it does: carries flits from an upstream router output to a downstream
// router input, and credits (freed buffer slots) from the downstream router back
// to the upstream one, each delayed by LATENCY clock cycles.
//
// How it works: a link that is too long to cross in one clock period gets as
// many registers as it needs, so crossing it takes LATENCY cycles; credits come
// back over an equally long wire and get the same number of stages. LATENCY is
// set by the instantiating network from the link's span in tiles (see shg_noc);
// the minimum is one cycle. Registers are reset to "no flit / no credit"; the
// payload registers are not reset. The module carries a hint that keeps a
// simulator from inlining it, so the hundreds of links of a network share one
// compiled copy of the code per latency; it has no effect on the circuit.
//
// Interface: up_flit enters, dn_flit leaves LATENCY cycles later; dn_credit
// enters, up_credit leaves LATENCY cycles later. There is no back-pressure on
// the link itself: flow control is by credits held in the upstream router.
module shg_link
  import shg_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  flit_ch_t   up_flit,
  output flit_ch_t   dn_flit,
  input  credit_ch_t dn_credit,
  output credit_ch_t up_credit
);

  /* verilator no_inline_module */

  // Stage i of the pipeline is entry i; a new value enters at entry 0.
  logic  [LATENCY-1:0]                       vpipe;
  logic  [LATENCY-1:0][$bits(vc_t)+$bits(flit_t)-1:0] dpipe;
  credit_ch_t [LATENCY-1:0]                   cpipe;

  if (LATENCY == 1) begin : g_one
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vpipe <= '0;
        cpipe <= '0;
      end else begin
        vpipe <= up_flit.valid;
        cpipe <= dn_credit;
      end
    end
    // VC and payload need no reset; they are only looked at while valid is set.
    always_ff @(posedge clk) dpipe <= {up_flit.vc, up_flit.flit};
  end else begin : g_multi
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vpipe <= '0;
        cpipe <= '0;
      end else begin
        vpipe <= {vpipe[LATENCY-2:0], up_flit.valid};
        cpipe <= {cpipe[LATENCY-2:0], dn_credit};
      end
    end
    always_ff @(posedge clk) dpipe <= {dpipe[LATENCY-2:0], up_flit.vc, up_flit.flit};
  end

  assign dn_flit   = {vpipe[LATENCY-1], dpipe[LATENCY-1]};
  assign up_credit = cpipe[LATENCY-1];

endmodule
