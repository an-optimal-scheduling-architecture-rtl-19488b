// rr_arbiter -- round-robin arbiter, one grant per cycle.
//
// Grants the requester at or after the one following the last grant. The
// grant is combinational from `req`; the priority pointer moves when a grant
// is given. `gnt_idx` is the index of the granted requester (valid with
// `gnt_any`). Used to share the read port of the mapping register file among
// the cluster queues; a helper of this design, not described in the paper.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
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
    int unsigned j;
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int unsigned i = 1; i <= N; i++) begin
      j = (int'(last) + i) % N;
      if (!gnt_any && req[j]) begin
        gnt[j]  = 1'b1;
        gnt_idx = IW'(j);
        gnt_any = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       last <= IW'(N - 1);
    else if (gnt_any) last <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_gnt_req: assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);

endmodule
