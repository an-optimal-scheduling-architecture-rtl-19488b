// batch_sched_top -- HW batch scheduler with its mapping register file and
// the patch queues of the compute clusters.
//
// A batch algorithm (batched softmax or matrix multiply) runs the same kernel
// on each of N patches of a tensor. Patches are spread over M memory banks,
// and a cluster reaches its own bank much faster than the others. This top
// level schedules one job so that each patch runs on a cluster near the bank
// holding it (Cluster Beamforming), evens out the load across banks or
// clusters when the patches are concentrated on few banks (load balancing),
// and hands each cluster a queue of the geometry of its patches.
//
//   patch_walker --+
//                  +--> cbmf_scheduler --> map_regfile --(rr_arbiter)--> Q x cluster_patch_queue
//   ext stream   --+
//
// Patches come either from the tensor walker (a whole tensor of N equal
// patches back to back) or, with cfg.src_ext, from an external descriptor
// stream for tensors whose patches are scattered. Once the scheduler is done
// each cluster queue follows its list in the register file through one shared
// read port, granted round-robin, one entry per cycle in total.
//
// Interface: drive `cfg` and pulse `start` while `busy` is low. `done` pulses
// when the register file is complete; the queues then fill and the cluster
// side pops them with q_ready. `all_idle` is high when every queue has read
// all its patches. Compute clusters, their CPUs and the memory banks are not
// part of this RTL: the queue outputs are where the cluster CPUs connect.
// The structure follows the paper's HW BATCH SCHEDULER and register file
// figures; the two patch sources and the shared read port are this design's.
module batch_sched_top
  import sched_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  sched_cfg_t  cfg,
  // external patch descriptors (cfg.src_ext = 1)
  input  logic        ext_valid,
  output logic        ext_ready,
  input  patch_desc_t ext_desc,
  // status
  output logic        busy,
  output logic        done,
  output bank_cnt_t   n_cnt,
  output bank_cnt_t   l_cnt,
  output quota_t      quota,
  output logic        unbalanced,
  output pcnt_t       moves,
  output pcnt_t       n_overlap,
  output pcnt_t       n_tie,
  output cost_t [NUM_BANKS-1:0]    gtime,
  output cost_t [NUM_CLUSTERS-1:0] cload,
  output pcnt_t [NUM_CLUSTERS-1:0] cl_count,
  input  pid_t        tab_raddr,
  output bank_entry_t tab_rdata,
  // cluster queues
  output logic        [NUM_CLUSTERS-1:0] q_valid,
  output queue_item_t [NUM_CLUSTERS-1:0] q_item,
  input  logic        [NUM_CLUSTERS-1:0] q_ready,
  output logic        all_idle
);

  logic src_q;
  logic sched_busy;
  logic go;

  assign go = start && !sched_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  src_q <= 1'b0;
    else if (go) src_q <= cfg.src_ext;
  end

  // ---------------------------------------------------------------- source
  logic        w_valid, w_ready, w_busy, w_done;
  pid_t        w_pid;
  patch_desc_t w_desc;
  logic        s_valid, s_ready;
  patch_desc_t s_desc;

  patch_walker u_walker (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (go && !cfg.src_ext),
    .base_addr   (cfg.base_addr),
    .patch_bytes (cfg.patch_bytes),
    .patch_rows  (cfg.patch_rows),
    .num_patches (cfg.num_patches),
    .out_valid   (w_valid),
    .out_ready   (w_ready),
    .out_pid     (w_pid),
    .out_desc    (w_desc),
    .busy        (w_busy),
    .done        (w_done)
  );

  assign s_valid   = src_q ? ext_valid : w_valid;
  assign s_desc    = src_q ? ext_desc  : w_desc;
  assign w_ready   = !src_q && s_ready;
  assign ext_ready = src_q && s_ready;

  // ---------------------------------------------------------------- scheduler
  logic  map_clear, map_we;
  pid_t  map_pid;
  cid_t  map_cluster;
  geom_t map_geom;

  cbmf_scheduler u_sched (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (go),
    .num_patches (cfg.num_patches),
    .lb_mode     (cfg.lb_mode),
    .weighted    (cfg.weighted),
    .thresh      (cfg.thresh),
    .lat         (cfg.lat),
    .in_valid    (s_valid),
    .in_ready    (s_ready),
    .in_desc     (s_desc),
    .map_clear   (map_clear),
    .map_we      (map_we),
    .map_pid     (map_pid),
    .map_cluster (map_cluster),
    .map_geom    (map_geom),
    .tab_raddr   (tab_raddr),
    .tab_rdata   (tab_rdata),
    .busy        (sched_busy),
    .done        (done),
    .n_cnt       (n_cnt),
    .l_cnt       (l_cnt),
    .quota       (quota),
    .unbalanced  (unbalanced),
    .moves       (moves),
    .n_overlap   (n_overlap),
    .n_tie       (n_tie),
    .gtime       (gtime),
    .cload       (cload)
  );

  assign busy = sched_busy;

  // ---------------------------------------------------------------- register file
  pid_t       rf_raddr;
  map_entry_t rf_rdata;
  pid_t [NUM_CLUSTERS-1:0] rf_head;

  map_regfile u_rf (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (map_clear),
    .we      (map_we),
    .pid     (map_pid),
    .cluster (map_cluster),
    .geom    (map_geom),
    .raddr   (rf_raddr),
    .rdata   (rf_rdata),
    .head    (rf_head),
    .count   (cl_count)
  );

  // ---------------------------------------------------------------- cluster queues
  logic [NUM_CLUSTERS-1:0] rd_req, rd_gnt, q_idle;
  pid_t [NUM_CLUSTERS-1:0] rd_addr;
  logic [CID_W-1:0]        gnt_idx;
  logic                    gnt_any;

  rr_arbiter #(.N(NUM_CLUSTERS)) u_arb (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (rd_req),
    .gnt     (rd_gnt),
    .gnt_idx (gnt_idx),
    .gnt_any (gnt_any)
  );

  assign rf_raddr = rd_addr[gnt_idx];

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_q
    cluster_patch_queue u_q (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (done),
      .head    (rf_head[c]),
      .count   (cl_count[c]),
      .rd_req  (rd_req[c]),
      .rd_addr (rd_addr[c]),
      .rd_gnt  (rd_gnt[c]),
      .rd_data (rf_rdata),
      .q_valid (q_valid[c]),
      .q_item  (q_item[c]),
      .q_ready (q_ready[c]),
      .idle    (q_idle[c])
    );
  end

  assign all_idle = &q_idle;

  // The walker feeds only the scheduler's MAP phase.
  a_walker: assert property (@(posedge clk) disable iff (!rst_n) w_busy |-> sched_busy);

endmodule
