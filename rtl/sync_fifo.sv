// sync_fifo -- small synchronous FIFO of WIDTH-bit words.
//
// Push with `push` when not `full`, pop with `pop` when not `empty`; both may
// happen in one cycle. `rdata` is the oldest word (show-ahead). `clear`
// empties it. `level` is the number of stored words. A generic helper of
// this design (the cluster patch queues), not described in the paper.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign empty = (level == 0);
  assign full  = (level == (AW+1)'(DEPTH));
  assign rdata = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push && !full) wp <= inc(wp);
      if (pop && !empty) rp <= inc(rp);
      level <= level + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
