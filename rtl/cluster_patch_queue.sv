// cluster_patch_queue -- the patch queue of one compute cluster.
//
// After the scheduler has filled the mapping register file, the CPU of each
// cluster reads the entries mapped onto its cluster and queues their
// geometry; the templated kernel then runs once per queued patch. This block
// does the reading and queueing in hardware: on `load` it takes the cluster's
// list head and length from the register file, then follows the `next`
// links, one entry per granted read, pushing {patch id, geometry} into a
// FIFO of DEPTH words that the kernel side pops (valid/ready).
// Reading the register file and queueing the coordinates follow the paper;
// doing it with a link-following fetcher and a shared, arbitrated read port
// is this design's choice.
//
// Timing: a read is requested whenever patches remain and the FIFO has room;
// the entry arrives in the cycle of the grant. `idle` is high once every
// patch of the list has been queued.
module cluster_patch_queue
  import sched_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,        // the register file holds a new mapping
  input  pid_t        head,
  input  pcnt_t       count,
  output logic        rd_req,
  output pid_t        rd_addr,
  input  logic        rd_gnt,
  input  map_entry_t  rd_data,
  output logic        q_valid,
  output queue_item_t q_item,
  input  logic        q_ready,
  output logic        idle
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pid_t        ptr;
  pcnt_t       remain;
  logic        full, empty;
  logic [AW:0] level;
  queue_item_t push_item;

  assign rd_req    = (remain != 0) && !full && !load;
  assign rd_addr   = ptr;
  assign push_item = '{pid: ptr, geom: rd_data.geom};
  assign q_valid   = !empty;
  assign idle      = (remain == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      remain <= '0;
    end else if (load) begin
      ptr    <= head;
      remain <= count;
    end else if (rd_req && rd_gnt) begin
      ptr    <= rd_data.next;
      remain <= remain - 1'b1;
    end
  end

  sync_fifo #(.WIDTH($bits(queue_item_t)), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (load),
    .push  (rd_req && rd_gnt),
    .wdata (push_item),
    .pop   (q_ready && !empty),
    .rdata (q_item),
    .full  (full),
    .empty (empty),
    .level (level)
  );

  a_gnt: assert property (@(posedge clk) disable iff (!rst_n) rd_gnt |-> rd_req);

endmodule
