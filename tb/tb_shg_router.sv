// tb_shg_router -- checks one router of the main 8 x 8 network (S_R = {4},
// S_C = {2,5}) placed at tile (3,3), with 8 virtual channels and a buffer depth
// reduced to 4 so that credits run out often.
//
// The testbench plays every upstream and downstream neighbour. It keeps its own
// credits for the router's input queues and its own model of the downstream
// queues, which drain at random and return a credit for every drained flit.
// Checks:
//  * phase 1, empty router: a flit presented in cycle t leaves in cycle t+1,
//    on a port whose far-end tile is one hop closer to the destination (hop
//    distances from the testbench's own construction of the graph), on VC
//    in_vc+1 (VC 0 towards the local port), with its payload intact, and a
//    credit for its input VC comes back in the same cycle;
//  * phase 2, random load on all ports: every flit leaves exactly once, on a
//    correct port and VC, no downstream queue ever holds more than DEPTH flits,
//    and every input credit comes back;
//  * credit stalls and switch-allocation conflicts both occur.
module tb_shg_router;
  import shg_pkg::*;

  localparam int NR = 8, NC = 8, NV = 8, D = 4;
  localparam int MYR = 3, MYC = 3;
  localparam int NP = 11;

  int checks   = 0;
  int failures = 0;

  logic       clk = 0;
  logic       rst_n = 0;
  flit_ch_t   in_ch     [NP];
  credit_ch_t credit_up [NP];
  flit_ch_t   out_ch    [NP];
  credit_ch_t credit_dn [NP];
  logic       evt_credit_stall, evt_sa_conflict;

  always #5 clk = ~clk;

  shg_router #(.NUM_VC(NV), .DEPTH(D)) dut (
    .clk, .rst_n, .my_row(coord_t'(MYR)), .my_col(coord_t'(MYC)),
    .in_ch, .credit_up, .out_ch, .credit_dn, .evt_credit_stall, .evt_sa_conflict);

  // Independent graph: hop distances between all tiles.
  int hd [64][64];
  // Far-end tile of each port of tile (3,3), -1 for none. Lengths: rows {1,4},
  // columns {1,2,5}; slots +len, -len in that order.
  int peer [NP];

  int up_cred   [NP][NV];   // credits the testbench holds for the router's inputs
  int dn_occ    [NP][NV];
  int pend      [NP][NV];   // credits seen this cycle, usable from the next   // occupancy of the modelled downstream queues
  int sent = 0, received = 0;
  int stalls = 0, conflicts = 0;
  bit outstanding [int];
  int outstanding_vc [int];

  task automatic build_graph();
    int xs[$];
    for (int a = 0; a < 64; a++) for (int b = 0; b < 64; b++) hd[a][b] = (a == b) ? 0 : 1000;
    xs = {1, 4};
    for (int r = 0; r < NR; r++) foreach (xs[k]) for (int i = 0; i + xs[k] < NC; i++) begin
      hd[r*NC+i][r*NC+i+xs[k]] = 1; hd[r*NC+i+xs[k]][r*NC+i] = 1;
    end
    xs = {1, 2, 5};
    for (int c = 0; c < NC; c++) foreach (xs[k]) for (int i = 0; i + xs[k] < NR; i++) begin
      hd[i*NC+c][(i+xs[k])*NC+c] = 1; hd[(i+xs[k])*NC+c][i*NC+c] = 1;
    end
    for (int k = 0; k < 64; k++) for (int a = 0; a < 64; a++) for (int b = 0; b < 64; b++)
      if (hd[a][k] + hd[k][b] < hd[a][b]) hd[a][b] = hd[a][k] + hd[k][b];
    peer = '{MYR*NC+MYC, MYR*NC+4, MYR*NC+2, MYR*NC+7, -1,
             4*NC+MYC, 2*NC+MYC, 5*NC+MYC, 1*NC+MYC, -1, -1};
  endtask

  function automatic flit_t make_flit(int id, int dr, int dc);
    flit_t f;
    f = '0;
    f.dst_row = coord_t'(dr);
    f.dst_col = coord_t'(dc);
    f.data[31:0]   = id;
    f.data[63:32]  = $urandom;
    f.data[511:480] = ~id;
    return f;
  endfunction

  // Check a flit leaving on port o.
  task automatic check_out(int o);
    int id;
    int me;
    int dst;
    flit_ch_t f;
    f  = out_ch[o];
    id = int'(f.flit.data[31:0]);
    me = MYR * NC + MYC;
    dst = int'(f.flit.dst_row) * NC + int'(f.flit.dst_col);
    checks++;
    if (!outstanding.exists(id) || f.flit.data[511:480] != ~f.flit.data[31:0]) begin
      failures++;
      $display("FAIL unknown or corrupted flit %0d on port %0d", id, o);
      return;
    end
    if (o == 0) begin
      if (dst != me || f.vc != 0) begin
        failures++;
        $display("FAIL flit %0d ejected at wrong tile or VC", id);
      end
    end else if (peer[o] < 0 || hd[peer[o]][dst] != hd[me][dst] - 1 ||
                 (int'(f.flit.dst_col) != MYC && peer[o] / NC != MYR) ||
                 int'(f.vc) != outstanding_vc[id] + 1) begin
      failures++;
      $display("FAIL flit %0d to (%0d,%0d) sent on port %0d vc %0d", id, f.flit.dst_row, f.flit.dst_col, o, f.vc);
    end
    outstanding.delete(id);
    received++;
    dn_occ[o][int'(f.vc)]++;
    checks++;
    if (dn_occ[o][int'(f.vc)] > D) begin
      failures++;
      $display("FAIL downstream queue overfilled at port %0d vc %0d", o, f.vc);
    end
  endtask

  initial begin
    int id;
    int dr, dc, v, p;
    int lat_ok;
    build_graph();
    for (int i = 0; i < NP; i++) begin
      in_ch[i] = '0;
      credit_dn[i] = '0;
      for (int j = 0; j < NV; j++) begin
        up_cred[i][j] = D;
        dn_occ[i][j]  = 0;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Phase 1: single flits through the empty router, exact timing.
    id = 1;
    for (int k = 0; k < 200; k++) begin
      p  = $urandom_range(NP - 1);
      v  = (p == 0) ? 0 : $urandom_range(NV - 2);
      dr = $urandom_range(NR - 1);
      dc = $urandom_range(NC - 1);
      in_ch[p] = '{valid: 1'b1, vc: vc_t'(v), flit: make_flit(id, dr, dc)};
      outstanding[id] = 1;
      outstanding_vc[id] = v;
      @(negedge clk);
      in_ch[p] = '0;
      // Cycle t+1: exactly one output must carry the flit, and the credit returns.
      lat_ok = 0;
      for (int o = 0; o < NP; o++) if (out_ch[o].valid) begin
        lat_ok++;
        check_out(o);
        dn_occ[o][int'(out_ch[o].vc)]--;   // phase 1 drains downstream at once
        credit_dn[o] = '{valid: 1'b1, vc: out_ch[o].vc};
      end
      checks++;
      if (lat_ok != 1 || !credit_up[p].valid || int'(credit_up[p].vc) != v) begin
        failures++;
        $display("FAIL phase 1 flit %0d: %0d outputs, credit %0b", id, lat_ok, credit_up[p].valid);
      end
      @(negedge clk);
      for (int o = 0; o < NP; o++) credit_dn[o] = '0;
      id++;
    end
    received = 0;
    // Credits for phase-1 flits were returned (checked above); balance the books.
    for (int i = 0; i < NP; i++) for (int j = 0; j < NV; j++) begin
      up_cred[i][j] = D;
      pend[i][j] = 0;
    end

    // Phase 2: random traffic with slow random downstream draining.
    for (int c = 0; c < 3000; c++) begin
      // Drive: at negedge decide new inputs.
      for (int i = 0; i < NP; i++) begin
        in_ch[i] = '0;
        credit_dn[i] = '0;
        if (c < 2500 && $urandom_range(99) < 40) begin
          v = (i == 0) ? 0 : $urandom_range(NV - 2);
          if (up_cred[i][v] > 0) begin
            dr = $urandom_range(NR - 1);
            dc = $urandom_range(NC - 1);
            in_ch[i] = '{valid: 1'b1, vc: vc_t'(v), flit: make_flit(id, dr, dc)};
            outstanding[id] = 1;
            outstanding_vc[id] = v;
            up_cred[i][v]--;
            id++;
            sent++;
          end
        end
        // Downstream drains one flit of a random VC now and then.
        v = $urandom_range(NV - 1);
        if (dn_occ[i][v] > 0 && $urandom_range(99) < ((c < 2500) ? 25 : 90)) begin
          credit_dn[i] = '{valid: 1'b1, vc: vc_t'(v)};
          dn_occ[i][v]--;
        end
      end
      for (int i = 0; i < NP; i++) for (int j = 0; j < NV; j++) begin
        up_cred[i][j] += pend[i][j];
        pend[i][j] = 0;
      end
      @(posedge clk);
      #1;
      if (evt_credit_stall) stalls++;
      if (evt_sa_conflict) conflicts++;
      // Outputs and credits of this cycle (combinational on registered state).
      @(negedge clk);
      for (int o = 0; o < NP; o++) if (out_ch[o].valid) check_out(o);
      // A credit granted now frees its slot at the coming edge: use it from
      // the cycle after.
      for (int i = 0; i < NP; i++) if (credit_up[i].valid) pend[i][int'(credit_up[i].vc)]++;
    end
    for (int i = 0; i < NP; i++) for (int j = 0; j < NV; j++) up_cred[i][j] += pend[i][j];
    for (int i = 0; i < NP; i++) begin
      in_ch[i] = '0;
      credit_dn[i] = '0;
    end
    checks++;
    if (outstanding.num() != 0) begin
      failures++;
      $display("FAIL %0d flits never left the router", outstanding.num());
    end
    for (int i = 0; i < NP; i++) for (int j = 0; j < NV; j++) begin
      checks++;
      if (up_cred[i][j] != D) begin
        failures++;
        $display("FAIL input %0d vc %0d: %0d credits back of %0d", i, j, up_cred[i][j], D);
      end
    end
    checks++;
    if (stalls == 0 || conflicts == 0) begin
      failures++;
      $display("FAIL stalls %0d conflicts %0d", stalls, conflicts);
    end
    $display("sent %0d received %0d credit-stall cycles %0d conflict cycles %0d", sent, received, stalls, conflicts);
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
