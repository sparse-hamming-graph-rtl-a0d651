// tb_shg_link -- checks that a pipelined link delays flits and credits by
// exactly LATENCY cycles and loses or invents nothing.
//
// Two links are tested, one and four cycles long. Random flits and credits are
// driven every cycle; a history of what was driven is kept in the testbench and
// every cycle the link outputs are compared with what was driven LATENCY
// cycles earlier (valid always, VC and payload when valid).
module tb_shg_link;
  import shg_pkg::*;

  int checks   = 0;
  int failures = 0;

  logic       clk = 0;
  logic       rst_n = 0;
  flit_ch_t   up_flit;
  credit_ch_t dn_credit;
  flit_ch_t   dn_flit_1, dn_flit_4;
  credit_ch_t up_credit_1, up_credit_4;

  always #5 clk = ~clk;

  shg_link #(.LATENCY(1)) u_l1 (.clk, .rst_n, .up_flit, .dn_flit(dn_flit_1), .dn_credit, .up_credit(up_credit_1));
  shg_link #(.LATENCY(4)) u_l4 (.clk, .rst_n, .up_flit, .dn_flit(dn_flit_4), .dn_credit, .up_credit(up_credit_4));

  flit_ch_t   fhist [$];
  credit_ch_t chist [$];

  function automatic flit_ch_t rand_flit();
    flit_ch_t f;
    f.valid = 1'($urandom);
    f.vc    = vc_t'($urandom);
    f.flit  = '0;
    f.flit.dst_row = coord_t'($urandom);
    f.flit.dst_col = coord_t'($urandom);
    for (int i = 0; i < int'(DATA_W) / 32; i++) f.flit.data[i*32 +: 32] = $urandom;
    return f;
  endfunction

  task automatic cmp(int lat, flit_ch_t got_f, credit_ch_t got_c);
    flit_ch_t   ef;
    credit_ch_t ec;
    int n;
    n = fhist.size();
    ef = (n >= lat) ? fhist[n - lat] : '0;
    ec = (n >= lat) ? chist[n - lat] : '0;
    checks++;
    if (got_f.valid !== ef.valid || (ef.valid && (got_f.vc !== ef.vc || got_f.flit !== ef.flit))) begin
      failures++;
      $display("FAIL lat %0d flit: got v=%0b vc=%0d exp v=%0b vc=%0d", lat, got_f.valid, got_f.vc, ef.valid, ef.vc);
    end
    checks++;
    if (got_c.valid !== ec.valid || (ec.valid && got_c.vc !== ec.vc)) begin
      failures++;
      $display("FAIL lat %0d credit", lat);
    end
  endtask

  initial begin
    up_flit   = '0;
    dn_credit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      @(negedge clk);
      // Outputs now show what the registers took at the last edge.
      if (cyc > 0) begin
        cmp(1, dn_flit_1, up_credit_1);
        cmp(4, dn_flit_4, up_credit_4);
      end
      up_flit         = rand_flit();
      dn_credit.valid = 1'($urandom);
      dn_credit.vc    = vc_t'($urandom);
      fhist.push_back(up_flit);
      chist.push_back(dn_credit);
    end
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
