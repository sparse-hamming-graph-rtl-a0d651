// tb_shg_vc_buffer -- checks the per-VC input queue against a queue model.
//
// A buffer with 4 virtual channels of depth 4 gets random writes (only while
// the model says the channel has room, as credit flow control guarantees) and
// random reads of non-empty channels. Every cycle the head of every channel
// (flit and side information) is compared with the model. Then one channel is filled and one more write is
// offered: the overflow flag must rise and the stored data must not change.
module tb_shg_vc_buffer;
  import shg_pkg::*;

  localparam int NV = 4;
  localparam int D  = 4;

  int checks   = 0;
  int failures = 0;

  logic  clk = 0;
  logic  rst_n = 0;
  logic  wr_valid, rd_valid;
  vc_t   wr_vc, rd_vc;
  flit_t wr_flit;
  logic [7:0] wr_side;
  logic [7:0] head_side [NV];
  logic  head_valid [NV];
  flit_t head_flit  [NV];
  logic  overflow;

  always #5 clk = ~clk;

  shg_vc_buffer #(.NUM_VC(NV), .DEPTH(D)) dut (.*);

  flit_t model [NV][$];
  logic [7:0] smodel [NV][$];

  function automatic flit_t rand_flit();
    flit_t f;
    f = '0;
    f.dst_row = coord_t'($urandom);
    f.src_col = coord_t'($urandom);
    for (int i = 0; i < int'(DATA_W) / 32; i++) f.data[i*32 +: 32] = $urandom;
    return f;
  endfunction

  task automatic compare_heads();
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (head_valid[v] !== (model[v].size() != 0) ||
          (model[v].size() != 0 && (head_flit[v] !== model[v][0] || head_side[v] !== smodel[v][0]))) begin
        failures++;
        $display("FAIL vc %0d: head_valid=%0b model size %0d", v, head_valid[v], model[v].size());
      end
    end
  endtask

  initial begin
    int v;
    wr_valid = 0;
    rd_valid = 0;
    wr_vc    = '0;
    rd_vc    = '0;
    wr_flit  = '0;
    wr_side  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      compare_heads();
      checks++;
      if (overflow) begin
        failures++;
        $display("FAIL unexpected overflow");
      end
      // Pick a write on a channel with room and a read on a non-empty one.
      v        = $urandom_range(NV - 1);
      wr_vc    = vc_t'(v);
      wr_valid = ($urandom_range(99) < 55) && (model[v].size() < D);
      wr_flit  = rand_flit();
      wr_side  = 8'($urandom);
      v        = $urandom_range(NV - 1);
      rd_vc    = vc_t'(v);
      rd_valid = ($urandom_range(99) < 45) && (model[v].size() != 0);
      @(posedge clk);
      #1;
      if (rd_valid) begin
        void'(model[int'(rd_vc)].pop_front());
        void'(smodel[int'(rd_vc)].pop_front());
      end
      if (wr_valid) begin
        model[int'(wr_vc)].push_back(wr_flit);
        smodel[int'(wr_vc)].push_back(wr_side);
      end
      wr_valid = 0;
      rd_valid = 0;
    end
    // Fill channel 2 and offer one write too many.
    @(negedge clk);
    while (model[2].size() < D) begin
      wr_valid = 1;
      wr_vc    = vc_t'(2);
      wr_flit  = rand_flit();
      @(posedge clk);
      #1;
      model[2].push_back(wr_flit);
      smodel[2].push_back(wr_side);
      @(negedge clk);
    end
    wr_valid = 1;
    wr_vc    = vc_t'(2);
    wr_flit  = rand_flit();
    #1;
    checks++;
    if (!overflow) begin
      failures++;
      $display("FAIL overflow not flagged");
    end
    // Withdraw the write before the clock edge (the assertion would stop a
    // simulation in which it is clocked in).
    wr_valid = 0;
    @(negedge clk);
    compare_heads();
    // Drain channel 2 completely: the extra flit must not appear.
    for (int i = 0; i < D; i++) begin
      compare_heads();
      rd_valid = 1;
      rd_vc    = vc_t'(2);
      @(posedge clk);
      #1;
      void'(model[2].pop_front());
      void'(smodel[2].pop_front());
      @(negedge clk);
      rd_valid = 0;
    end
    compare_heads();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
