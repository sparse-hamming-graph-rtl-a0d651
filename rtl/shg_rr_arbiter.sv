// shg_rr_arbiter -- round-robin arbiter used by the router's switch allocator.
//
// What it does: grants one of N requesters, starting the search one position
// after the requester that was granted last, so every requester that keeps
// asking is served within N grants. Combinational grant; the priority pointer
// advances only when the caller reports (advance) that the grant was used.
module shg_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N-1:0]               req,
  input  logic                       advance,
  output logic                       gnt_valid,
  output logic [$clog2(N+1)-1:0]     gnt_idx
);

  localparam int unsigned IW = $clog2(N + 1);

  logic [IW-1:0] ptr;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int i = 0; i < int'(N); i++) begin
      int idx;
      idx = int'(ptr) + i;
      if (idx >= int'(N)) idx = idx - int'(N);
      if (!gnt_valid && req[idx]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && gnt_valid) ptr <= (int'(gnt_idx) == int'(N) - 1) ? '0 : gnt_idx + IW'(1);
  end

endmodule
