// tb_shg_ni -- checks the network interface between endpoints and router.
//
// The testbench plays the endpoint and the router's local port (depth 4):
//  * injection: accepted flits appear on to_router one cycle later, on VC 0,
//    unchanged; after DEPTH flits without returned credits inj_ready drops and
//    rises again when the router returns a credit;
//  * ejection: flits from the router come out on ej_* in order, one cycle
//    later, are held while ej_ready is low, and every drained flit returns one
//    credit.
module tb_shg_ni;
  import shg_pkg::*;

  localparam int D = 4;

  int checks   = 0;
  int failures = 0;

  logic       clk = 0;
  logic       rst_n = 0;
  logic       inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t      inj_flit, ej_flit;
  flit_ch_t   to_router, from_router;
  credit_ch_t credit_from_router, credit_to_router;

  always #5 clk = ~clk;

  shg_ni #(.DEPTH(D)) dut (.*);

  flit_t ejq [$];
  int    router_cred;   // credits the modelled router holds for the ejection queue
  int    credits_back;

  function automatic flit_t rand_flit();
    flit_t f;
    f = '0;
    f.dst_row = coord_t'($urandom);
    f.dst_col = coord_t'($urandom);
    for (int i = 0; i < int'(DATA_W) / 32; i++) f.data[i*32 +: 32] = $urandom;
    return f;
  endfunction

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    flit_t f;
    inj_valid = 0;
    inj_flit  = '0;
    ej_ready  = 0;
    from_router        = '0;
    credit_from_router = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Injection: D flits go through, the next one waits for a credit.
    for (int k = 0; k < D; k++) begin
      expect_true(inj_ready, "inj_ready high while credits remain");
      f = rand_flit();
      inj_valid = 1;
      inj_flit  = f;
      @(negedge clk);
      inj_valid = 0;
      expect_true(to_router.valid && to_router.vc == '0 && to_router.flit == f,
                  "injected flit on to_router one cycle later");
    end
    @(negedge clk);
    expect_true(!to_router.valid, "no flit without a handshake");
    expect_true(!inj_ready, "inj_ready low after DEPTH flits");
    credit_from_router = '{valid: 1'b1, vc: '0};
    @(negedge clk);
    credit_from_router = '0;
    expect_true(inj_ready, "inj_ready back after a credit");

    // Ejection with random ready, random arrivals within the credits.
    router_cred  = D;
    credits_back = 0;
    for (int cyc = 0; cyc < 600; cyc++) begin
      from_router = '0;
      if (router_cred > 0 && $urandom_range(99) < 50) begin
        from_router = '{valid: 1'b1, vc: '0, flit: rand_flit()};
        router_cred--;
      end
      ej_ready = ($urandom_range(99) < 40);
      #1;
      expect_true(ej_valid == (ejq.size() > 0), "ej_valid matches queue model");
      if (ej_valid && ej_ready) begin
        expect_true(ejq.size() > 0 && ej_flit == ejq[0], "ejected flit in order");
        expect_true(credit_to_router.valid, "credit returned for drained flit");
        if (ejq.size() > 0) void'(ejq.pop_front());
      end else begin
        expect_true(!credit_to_router.valid, "no credit without a drained flit");
      end
      if (credit_to_router.valid) router_cred++;
      @(posedge clk);
      if (from_router.valid) ejq.push_back(from_router.flit);
      @(negedge clk);
    end
    from_router = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
