// cbmf_scheduler -- the Cluster Beamforming scheduler (HW batch scheduler).
//
// Runs the paper's two-step scheduling over one job of up to MAX_PATCHES
// patches and writes the patch <-> cluster mapping register file:
//
//   MAP    one patch descriptor per cycle from the input stream: bank_mapper
//          finds the banks it lies in (H columns, OVERLAP), overlap_remap
//          assigns it to the bank with the largest portion, and the row is
//          written to bank_table, which counts N and L per bank.
//   LB     load_balancer checks L for imbalance and, in mode LB_BANK, turns
//          part of each overloaded bank's patches over to under-loaded
//          banks (quota[b][g]).
//   SCHED  for every bank b in turn, the patches assigned to b are visited in
//          patch order and each is placed on a cluster: in modes LB_NONE and
//          LB_BANK on the next round-robin cluster of the group g its quota
//          names (own group first), in mode LB_CLUSTER on the cluster chosen
//          by cluster_balancer. Every placement is written to the register
//          file.
//
// The steps, their order and the per-bank round-robin follow the paper
// (flowcharts Fig-1 and Fig-2 and the HW BATCH SCHEDULER figure: Cluster BMF
// feeding Load Balancing). The one-patch-per-cycle datapath, the full table
// scan per bank in SCHED and the configuration fields are this design's.
//
// Timing for N patches with an input stream that is always valid, counted
// from the cycle `start` is taken to the cycle `done` is high: N cycles of
// MAP, 3 cycles of LB, NUM_BANKS*N cycles of SCHED and 2 more, that is
// 5N + 5 for the default four banks; when the balancer moves patches, add
// one cycle per moved patch and one more. `start` is taken only when idle; the
// configuration is sampled at `start`.
module cbmf_scheduler
  import sched_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // job configuration, sampled at start
  input  logic        start,
  input  pcnt_t       num_patches,
  input  lb_mode_e    lb_mode,
  input  logic        weighted,
  input  pcnt_t       thresh,
  input  lat_tab_t    lat,
  // patch descriptors, in patch order
  input  logic        in_valid,
  output logic        in_ready,
  input  patch_desc_t in_desc,
  // mapping register file write port
  output logic        map_clear,
  output logic        map_we,
  output pid_t        map_pid,
  output cid_t        map_cluster,
  output geom_t       map_geom,
  // patch <-> bank table readout
  input  pid_t        tab_raddr,
  output bank_entry_t tab_rdata,
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
  output cost_t [NUM_BANKS-1:0] gtime,
  output cost_t [NUM_CLUSTERS-1:0] cload
);

  typedef enum logic [2:0] {S_IDLE, S_MAP, S_LB_GO, S_LB_WAIT, S_SCHED, S_DONE} state_e;
  state_e   state;

  pcnt_t    num_q, thresh_q;
  lb_mode_e mode_q;
  logic     wgt_q;
  lat_tab_t lat_q;
  pcnt_t    idx;
  bid_t     cur_bank;
  quota_t   rem;

  // ---------------------------------------------------------------- MAP
  logic [NUM_BANKS-1:0] mask;
  logic                 overlap;
  len_t [NUM_BANKS-1:0] portion;
  bid_t                 rbank;
  logic                 tie;
  logic                 map_take;

  assign in_ready = (state == S_MAP);
  assign map_take = in_valid && in_ready;

  bank_mapper u_mapper (
    .addr    (in_desc.geom.addr),
    .bytes   (in_desc.bytes),
    .mask    (mask),
    .overlap (overlap),
    .portion (portion)
  );

  overlap_remap u_remap (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (map_take),
    .mask    (mask),
    .overlap (overlap),
    .portion (portion),
    .bank    (rbank),
    .tie     (tie)
  );

  bank_entry_t wentry, sentry;
  assign wentry = '{mask: mask, overlap: overlap, bank: rbank, geom: in_desc.geom};

  bank_table u_table (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (state == S_IDLE && start),
    .we      (map_take),
    .widx    (pid_t'(idx)),
    .wdata   (wentry),
    .raddr_a (pid_t'(idx)),
    .rdata_a (sentry),
    .raddr_b (tab_raddr),
    .rdata_b (tab_rdata),
    .n_cnt   (n_cnt),
    .l_cnt   (l_cnt)
  );

  // ---------------------------------------------------------------- LB
  logic lb_done, lb_busy;

  load_balancer u_lb (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (state == S_LB_GO),
    .mode       (mode_q),
    .weighted   (wgt_q),
    .thresh     (thresh_q),
    .l_cnt      (l_cnt),
    .lat        (lat_q),
    .quota      (quota),
    .gtime      (gtime),
    .unbalanced (unbalanced),
    .moves      (moves),
    .busy       (lb_busy),
    .done       (lb_done)
  );

  // ---------------------------------------------------------------- SCHED
  logic sched_hit;
  bid_t grp;
  cid_t rr_cluster, cb_cluster;

  assign sched_hit = (state == S_SCHED) && (sentry.bank == cur_bank);

  always_comb begin
    grp = cur_bank;
    if (rem[cur_bank][cur_bank] == 0) begin
      for (int g = NUM_BANKS - 1; g >= 0; g--)
        if (rem[cur_bank][g] != 0) grp = bid_t'(g);
    end
  end

  rr_cluster_select u_rr (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (state == S_IDLE && start),
    .take    (sched_hit && mode_q != LB_CLUSTER),
    .group   (grp),
    .cluster (rr_cluster)
  );

  cluster_balancer u_cb (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (state == S_IDLE && start),
    .take     (sched_hit && mode_q == LB_CLUSTER),
    .bank     (cur_bank),
    .weighted (wgt_q),
    .lat      (lat_q),
    .cluster  (cb_cluster),
    .cload    (cload)
  );

  assign map_clear   = (state == S_IDLE) && start;
  assign map_we      = sched_hit;
  assign map_pid     = pid_t'(idx);
  assign map_cluster = (mode_q == LB_CLUSTER) ? cb_cluster : rr_cluster;
  assign map_geom    = sentry.geom;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      num_q     <= '0;
      thresh_q  <= '0;
      mode_q    <= LB_NONE;
      wgt_q     <= 1'b0;
      lat_q     <= '0;
      idx       <= '0;
      cur_bank  <= '0;
      rem       <= '0;
      done      <= 1'b0;
      n_overlap <= '0;
      n_tie     <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && num_patches != 0 && int'(num_patches) <= MAX_PATCHES) begin
          num_q     <= num_patches;
          thresh_q  <= thresh;
          mode_q    <= lb_mode;
          wgt_q     <= weighted;
          lat_q     <= lat;
          idx       <= '0;
          n_overlap <= '0;
          n_tie     <= '0;
          state     <= S_MAP;
        end
        S_MAP: if (map_take) begin
          n_overlap <= n_overlap + pcnt_t'(overlap);
          n_tie     <= n_tie + pcnt_t'(tie);
          if (idx == num_q - 1'b1) begin
            idx   <= '0;
            state <= S_LB_GO;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_LB_GO: state <= S_LB_WAIT;
        S_LB_WAIT: if (lb_done) begin
          rem      <= quota;
          cur_bank <= '0;
          idx      <= '0;
          state    <= S_SCHED;
        end
        S_SCHED: begin
          if (sched_hit && mode_q != LB_CLUSTER)
            rem[cur_bank][grp] <= rem[cur_bank][grp] - 1'b1;
          if (idx == num_q - 1'b1) begin
            idx <= '0;
            if (cur_bank == bid_t'(NUM_BANKS - 1)) state <= S_DONE;
            else cur_bank <= cur_bank + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The balancer runs only while the scheduler waits for it.
  a_lb_busy: assert property (@(posedge clk) disable iff (!rst_n) lb_busy |-> state == S_LB_WAIT);

  // A patch placed by quota must find quota left for its bank.
  a_quota: assert property (@(posedge clk) disable iff (!rst_n)
    sched_hit && mode_q != LB_CLUSTER |-> rem[cur_bank][grp] != 0);

endmodule
