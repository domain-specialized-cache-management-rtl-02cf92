// rr_arbiter: round-robin arbiter, N requesters, one grant per cycle.
//
// The grant is combinational from req: the first requester at or after the priority
// pointer wins. When the granted request is taken (advance high in that cycle) the
// pointer moves to the requester after the winner, so every requester is served
// within N grants. Used by llc_nuca to share each LLC slice among the cores.
module rr_arbiter #(
  parameter int unsigned N   = 8,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     req,
  input  logic             advance,
  output logic [N-1:0]     gnt,
  output logic [IDX_W-1:0] gnt_idx,
  output logic             gnt_any
);

  logic [IDX_W-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (!gnt_any && req[i]) begin
        gnt_any = 1'b1;
        gnt_idx = IDX_W'(i);
      end
    end
    if (gnt_any) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ptr <= '0;
    else if (advance && gnt_any) ptr <= IDX_W'((int'(gnt_idx) + 1) % N);
  end

  // at most one grant, and only to a requester
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_granted_req: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);

endmodule
