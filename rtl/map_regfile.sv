// map_regfile -- the patch <-> cluster mapping register file.
//
// The output of the batch scheduler: for every patch the cluster it runs on
// and its geometry, and for every cluster the ordered list of its patches.
// The list is kept as a linked list through the entries: head[c] is the
// first patch of cluster c, entry.next the following one, count[c] the list
// length. The register file and its contents (mapping plus geometry) follow
// the paper; the linked-list organisation, which needs only one entry per
// patch, is this design's choice.
//
// Write port: `we` with `pid`, `cluster`, `geom` appends patch `pid` to the
// cluster's list in one cycle (it writes the new entry and the `next` field
// of the previous tail). Read port: asynchronous, `raddr` -> `rdata`.
// `clear` empties every list.
module map_regfile
  import sched_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_PATCHES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       we,
  input  pid_t       pid,
  input  cid_t       cluster,
  input  geom_t      geom,
  input  pid_t       raddr,
  output map_entry_t rdata,
  output pid_t  [NUM_CLUSTERS-1:0] head,
  output pcnt_t [NUM_CLUSTERS-1:0] count
);

  map_entry_t mem [DEPTH];
  pid_t [NUM_CLUSTERS-1:0] tail;

  assign rdata = mem[raddr];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[pid] <= '{cluster: cluster, next: '0, geom: geom};
      if (count[cluster] != 0) mem[tail[cluster]].next <= pid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else if (clear) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else if (we) begin
      if (count[cluster] == 0) head[cluster] <= pid;
      tail[cluster]  <= pid;
      count[cluster] <= count[cluster] + 1'b1;
    end
  end

  a_pid: assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(pid) < DEPTH);
  a_cid: assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(cluster) < NUM_CLUSTERS);

endmodule
