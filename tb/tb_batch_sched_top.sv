// tb_batch_sched_top -- end-to-end test of the batch scheduler at its
// default size (24 clusters, 4 banks, 384-patch jobs).
//
// Each job is scheduled and then drained from the 24 cluster queues, with
// random or full-rate pops. For every job the test checks that each patch is
// delivered exactly once, on the cluster the register file names, with the
// right geometry, and that the placement matches what the job calls for:
//   1 BERT tensor (384 x 512 KiB) wholly in bank 0, plain bank balancing:
//     16 patches per cluster; scheduling and drain cycle counts.
//   2 the same, weighted (near 1, far 3): 192 near, 64 per far group.
//   3 scattered patches from the external stream, some straddling banks,
//     some split exactly in half, Cluster Beamforming only: every patch on
//     the group of its largest bank (either bank for halves).
//   4 a tensor across the bank 0|1 boundary with cluster-level weighted
//     balancing: per-cluster times add up and beat Beamforming alone.
//   5 an evenly spread external job with bank balancing on: left undisturbed.
// Mechanisms counted, each must occur: overlap, equal-portion draw,
// imbalance with moves, undisturbed balanced load, weighted balancing,
// cluster-level balancing, walker source, external source, read-port
// contention, queue full back-pressure.
module tb_batch_sched_top;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 384;
  localparam longint BS = 64'd1 << 33;
  localparam longint PB = 64'h8_0000;   // 512 x 512 x 2 bytes

  logic start, ext_valid, ext_ready, busy, done, unbalanced, all_idle;
  sched_cfg_t cfg;
  patch_desc_t ext_desc;
  bank_cnt_t n_cnt, l_cnt;
  quota_t quota;
  pcnt_t moves, n_overlap, n_tie;
  cost_t [NUM_BANKS-1:0] gtime;
  cost_t [NUM_CLUSTERS-1:0] cload;
  pcnt_t [NUM_CLUSTERS-1:0] cl_count;
  pid_t tab_raddr;
  bank_entry_t tab_rdata;
  logic [NUM_CLUSTERS-1:0] q_valid, q_ready;
  queue_item_t [NUM_CLUSTERS-1:0] q_item;

  batch_sched_top dut (.*);

  int grp [NUM_CLUSTERS] = '{0,0,0,1,1,1, 0,0,0,1,1,1, 2,2,2,3,3,3, 2,2,2,3,3,3};

  // mechanism counters
  typedef enum int {M_OVERLAP, M_TIE, M_MOVES, M_UNDISTURBED, M_WEIGHTED, M_CLUSTER,
                    M_WALKER, M_EXT, M_CONTENTION, M_QFULL, M_NUM} mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"overlap", "tie", "moves", "undisturbed", "weighted",
                               "cluster-level", "walker", "external", "contention", "queue-full"};

  patch_desc_t descs [N];
  int ok_a [N], ok_b [N];        // allowed bank(s) of each patch, -1 = any
  int got_cl [N], got_n [N];
  int per_cl [NUM_CLUSTERS];
  int checks = 0, failures = 0;
  bit rand_pop;

  always_ff @(negedge clk) q_ready <= rand_pop ? NUM_CLUSTERS'({$urandom} & {$urandom}) : '1;

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.rd_req) > 1) mech[M_CONTENTION]++;
    for (int c = 0; c < NUM_CLUSTERS; c++) begin
      if (q_valid[c] && q_ready[c]) begin
        int p; p = int'(q_item[c].pid);
        got_n[p]++; got_cl[p] = c; per_cl[c]++;
        checks++;
        if (q_item[c].geom != descs[p].geom) begin failures++; $display("FAIL geom of patch %0d", p); end
      end
    end
  end
  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.g_q[c].u_q.full && !q_ready[c]) mech[M_QFULL]++;
  end

  task automatic set_lat(int near, int far);
    for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++)
      cfg.lat[b][g] = lat_t'((b == g) ? near : far);
  endtask

  function automatic patch_desc_t mk(longint a, int i);
    patch_desc_t d;
    d.geom.addr = addr_t'(a); d.geom.row0 = row_t'(i * 512); d.geom.rows = row_t'(512);
    d.bytes = len_t'(PB);
    return d;
  endfunction

  // Runs one job; returns cycles from start to done and the drain cycles.
  task automatic run_job(bit ext, output int sched_cycles, output int drain_cycles);
    int k;
    foreach (got_n[i]) begin got_n[i] = 0; got_cl[i] = -1; end
    foreach (per_cl[c]) per_cl[c] = 0;
    cfg.src_ext = ext;
    cfg.num_patches = pcnt_t'(N);
    if (ext) mech[M_EXT]++; else mech[M_WALKER]++;
    if (cfg.weighted && cfg.lb_mode != LB_NONE) mech[M_WEIGHTED]++;
    if (cfg.lb_mode == LB_CLUSTER) mech[M_CLUSTER]++;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    sched_cycles = 1; k = 0;
    while (!done && sched_cycles < 20000) begin
      ext_valid = ext && k < N;
      ext_desc = descs[(k < N) ? k : 0];
      @(posedge clk);
      if (ext_valid && ext_ready) k++;
      @(negedge clk);
      sched_cycles++;
    end
    ext_valid = 0;
    mech[M_OVERLAP] += int'(n_overlap);
    mech[M_TIE] += int'(n_tie);
    if (unbalanced && moves != 0) mech[M_MOVES]++;
    if (!unbalanced && cfg.lb_mode == LB_BANK) mech[M_UNDISTURBED]++;
    drain_cycles = 0;
    @(negedge clk);
    while (!(all_idle && q_valid == '0) && drain_cycles < 100000) begin @(negedge clk); drain_cycles++; end
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (got_n[i] != 1) begin failures++; $display("FAIL patch %0d delivered %0d times", i, got_n[i]); end
      else if (ok_a[i] >= 0 && grp[got_cl[i]] != ok_a[i] && grp[got_cl[i]] != ok_b[i]) begin
        failures++; $display("FAIL patch %0d on cluster %0d (group %0d), bank %0d/%0d", i, got_cl[i], grp[got_cl[i]], ok_a[i], ok_b[i]);
      end
    end
    for (int c = 0; c < NUM_CLUSTERS; c++) begin
      checks++;
      if (int'(cl_count[c]) != per_cl[c]) begin failures++; $display("FAIL cluster %0d count %0d popped %0d", c, cl_count[c], per_cl[c]); end
    end
  endtask

  function automatic int group_total(int g);
    int s; s = 0;
    for (int c = 0; c < NUM_CLUSTERS; c++) if (grp[c] == g) s += per_cl[c];
    return s;
  endfunction

  initial begin
    int sc, dc;
    foreach (mech[m]) mech[m] = 0;
    start = 0; ext_valid = 0; ext_desc = '0; tab_raddr = '0; rand_pop = 0;
    cfg = '0;
    cfg.patch_bytes = len_t'(PB); cfg.patch_rows = row_t'(512); cfg.thresh = pcnt_t'(8);
    set_lat(1, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: BERT tensor in bank 0, plain bank balancing, full-rate pops
    cfg.base_addr = addr_t'(64'h2000_0000);
    for (int i = 0; i < N; i++) begin descs[i] = mk(64'h2000_0000 + i * PB, i); ok_a[i] = -1; ok_b[i] = -1; end
    cfg.lb_mode = LB_BANK; cfg.weighted = 0;
    run_job(0, sc, dc);
    checks += 3;
    if (moves != 288) begin failures++; $display("FAIL job 1 moves %0d", moves); end
    if (sc != N + 3 + 289 + 4 * N + 2) begin failures++; $display("FAIL job 1 schedule cycles %0d", sc); end
    if (dc > N + 8) begin failures++; $display("FAIL job 1 drain %0d cycles for %0d reads", dc, N); end
    for (int c = 0; c < NUM_CLUSTERS; c++) begin
      checks++;
      if (per_cl[c] != 16) begin failures++; $display("FAIL job 1 cluster %0d got %0d", c, per_cl[c]); end
    end

    // ---- 2: weighted
    rand_pop = 1;
    cfg.weighted = 1;
    run_job(0, sc, dc);
    checks += 4;
    if (group_total(0) != 192) begin failures++; $display("FAIL job 2 group 0 %0d", group_total(0)); end
    for (int g = 1; g < 4; g++) if (group_total(g) != 64) begin failures++; $display("FAIL job 2 group %0d %0d", g, group_total(g)); end

    // ---- 3: scattered, external stream, CBMF only
    for (int i = 0; i < N; i++) begin
      int b, kind; longint a;
      b = $urandom_range(1, 3);
      kind = $urandom_range(0, 5);
      if (kind == 0) begin a = b * BS - PB / 2; ok_a[i] = b - 1; ok_b[i] = b; end           // halves
      else if (kind == 1) begin a = b * BS - PB / 4; ok_a[i] = b; ok_b[i] = b; end          // most above
      else if (kind == 2) begin a = b * BS - 3 * PB / 4; ok_a[i] = b - 1; ok_b[i] = b - 1; end // most below
      else begin a = b * BS + longint'($urandom_range(0, 4000)) * PB; ok_a[i] = b; ok_b[i] = b; end
      descs[i] = mk(a, i);
    end
    cfg.lb_mode = LB_NONE; cfg.weighted = 0;
    run_job(1, sc, dc);
    checks++;
    if (n_overlap == 0 || n_tie == 0) begin failures++; $display("FAIL job 3 overlaps %0d ties %0d", n_overlap, n_tie); end
    tab_raddr = pid_t'(5); #1;
    checks++;
    if (int'(tab_rdata.bank) != ok_a[5] && int'(tab_rdata.bank) != ok_b[5]) begin failures++; $display("FAIL table row 5"); end

    // ---- 4: tensor across the 0|1 boundary, cluster-level weighted balancing
    cfg.base_addr = addr_t'(BS - 100 * PB);
    for (int i = 0; i < N; i++) begin descs[i] = mk(BS - 100 * PB + i * PB, i); ok_a[i] = -1; ok_b[i] = -1; end
    cfg.lb_mode = LB_CLUSTER; cfg.weighted = 1; set_lat(2, 5);
    run_job(0, sc, dc);
    begin
      int mx;
      int acc [NUM_CLUSTERS];
      mx = 0;
      for (int c = 0; c < NUM_CLUSTERS; c++) if (int'(cload[c]) > mx) mx = int'(cload[c]);
      // each cluster's accumulated time must be the sum of the costs of the
      // patches it received (patches 0..99 lie in bank 0, the rest in bank 1),
      // and the largest must beat Cluster Beamforming alone, which puts 284
      // patches on bank 1's 6 clusters: 48 x 2 = 96
      foreach (acc[c]) acc[c] = 0;
      for (int i = 0; i < N; i++) if (got_cl[i] >= 0) acc[got_cl[i]] += int'(cfg.lat[(i < 100) ? 0 : 1][grp[got_cl[i]]]);
      for (int c = 0; c < NUM_CLUSTERS; c++) begin
        checks++;
        if (int'(cload[c]) != acc[c]) begin failures++; $display("FAIL job 4 cluster %0d time %0d exp %0d", c, cload[c], acc[c]); end
      end
      checks++;
      if (mx >= 96) begin failures++; $display("FAIL job 4 makespan %0d", mx); end
      checks++;
      if (l_cnt[0] != 100 || l_cnt[1] != 284) begin failures++; $display("FAIL job 4 L %0d %0d", l_cnt[0], l_cnt[1]); end
    end

    // ---- 5: evenly spread, balancing on but nothing to do
    for (int i = 0; i < N; i++) begin
      int b; b = i % 4;
      descs[i] = mk(b * BS + (i / 4) * PB, i); ok_a[i] = b; ok_b[i] = b;
    end
    cfg.lb_mode = LB_BANK; cfg.weighted = 0; set_lat(1, 3);
    run_job(1, sc, dc);
    checks++;
    if (unbalanced || moves != 0) begin failures++; $display("FAIL job 5 disturbed"); end

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-13s happened %0d times", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mech_name[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
