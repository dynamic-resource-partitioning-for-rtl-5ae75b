// rr_arbiter: round-robin arbiter for the shared feed rows.
//
// Every partition in its feed step raises req[p]; at most one gets gnt[p] per
// cycle (gnt is combinational from req). The search starts one place after the
// last granted requester, so a partition waits at most N-1 cycles for a slot.
// This arbitration is this design's own answer to the shared feed rows.
module rr_arbiter #(
  parameter int unsigned N = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          gnt_any
);

  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int i = 1; i <= int'(N); i++) begin
      logic [IW-1:0] cand;
      cand = IW'((int'(last) + i) % int'(N));
      if (!gnt_any && req[cand]) begin
        gnt_any   = 1'b1;
        gnt_idx   = cand;
        gnt[cand] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       last <= IW'(N - 1);
    else if (gnt_any) last <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
