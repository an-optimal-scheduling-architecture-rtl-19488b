// tb_cbmf_scheduler -- self-checking test of cbmf_scheduler.
// Jobs of 384 patches:
//  A  scattered patches, some straddling banks unequally, Cluster
//     Beamforming only: every patch must land on its largest bank's group,
//     the k-th patch of a bank on that group's cluster k mod 6; N and L sums
//     and the cycle count (N + 3 + 4N + 2, plus input gaps) are checked.
//  B  all patches in bank 0, plain bank balancing: 96 per group, 16 per cluster.
//  C  the same, weighted (near 1, far 3): 192 kept near, 64 to each far group.
//  D  the same, cluster-level balancing: 16 per cluster.
//  E  patches split exactly in half over two banks: every one is an equal-
//     portion draw, lands on one of its two banks, and both banks are drawn.
// Expected values are worked out here from the patch addresses.
module tb_cbmf_scheduler;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 384;
  localparam longint BS = 64'd1 << 33;

  logic start, weighted, in_valid, in_ready;
  pcnt_t num_patches, thresh;
  lb_mode_e lb_mode;
  lat_tab_t lat;
  patch_desc_t in_desc;
  logic map_clear, map_we, busy, done, unbalanced;
  pid_t map_pid, tab_raddr;
  cid_t map_cluster;
  geom_t map_geom;
  bank_entry_t tab_rdata;
  bank_cnt_t n_cnt, l_cnt;
  quota_t quota;
  pcnt_t moves, n_overlap, n_tie;
  cost_t [NUM_BANKS-1:0] gtime;
  cost_t [NUM_CLUSTERS-1:0] cload;

  cbmf_scheduler dut (.*);

  int grp [NUM_CLUSTERS] = '{0,0,0,1,1,1, 0,0,0,1,1,1, 2,2,2,3,3,3, 2,2,2,3,3,3};
  int members [4][6] = '{'{0, 1, 2, 6, 7, 8}, '{3, 4, 5, 9, 10, 11},
                          '{12, 13, 14, 18, 19, 20}, '{15, 16, 17, 21, 22, 23}};

  patch_desc_t descs [N];
  int exp_bank [N];     // -1: either of two tied banks
  int tie_a [N], tie_b [N];
  int got_cl [N];
  int writes [N];
  int checks = 0, failures = 0;
  int cycles, gaps;
  bit gappy;

  always @(posedge clk) if (map_we) begin
    writes[map_pid]++;
    got_cl[map_pid] = int'(map_cluster);
    checks++;
    if (map_geom != descs[map_pid].geom) begin failures++; $display("FAIL geom of patch %0d", map_pid); end
  end

  task automatic set_lat(int near, int far);
    for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++) lat[b][g] = lat_t'((b == g) ? near : far);
  endtask

  function automatic patch_desc_t mk(longint a, longint n, int i);
    patch_desc_t d;
    d.geom.addr = addr_t'(a); d.geom.row0 = row_t'(i * 512); d.geom.rows = row_t'(512);
    d.bytes = len_t'(n);
    return d;
  endfunction

  task automatic run_job(lb_mode_e m, bit w);
    int k;
    foreach (writes[i]) begin writes[i] = 0; got_cl[i] = -1; end
    lb_mode = m; weighted = w; num_patches = pcnt_t'(N); thresh = 4;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1; gaps = 0; k = 0;
    while (!done) begin
      if (in_ready && k < N) begin
        in_valid = !gappy || ($urandom_range(0, 3) != 0);
        in_desc = descs[k];
      end else in_valid = 0;
      @(posedge clk);
      if (in_valid && in_ready) k++;
      else if (dut.state == dut.S_MAP) gaps++;
      @(negedge clk);
      cycles++;
      if (cycles > 20000) break;
    end
    in_valid = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (writes[i] != 1) begin failures++; $display("FAIL patch %0d written %0d times", i, writes[i]); end
    end
  endtask

  task automatic check_groups(int g0, int g1, int g2, int g3);
    int cnt [4];
    int e [4];
    e = '{g0, g1, g2, g3};
    cnt = '{0, 0, 0, 0};
    for (int i = 0; i < N; i++) if (got_cl[i] >= 0) cnt[grp[got_cl[i]]]++;
    for (int g = 0; g < 4; g++) begin
      checks++;
      if (cnt[g] != e[g]) begin failures++; $display("FAIL group %0d got %0d patches exp %0d", g, cnt[g], e[g]); end
    end
  endtask

  task automatic check_per_cluster(int c0, int c_from, int c_to);
    int cnt [NUM_CLUSTERS];
    foreach (cnt[c]) cnt[c] = 0;
    for (int i = 0; i < N; i++) if (got_cl[i] >= 0) cnt[got_cl[i]]++;
    for (int c = c_from; c <= c_to; c++) begin
      checks++;
      if (cnt[c] != c0) begin failures++; $display("FAIL cluster %0d has %0d exp %0d", c, cnt[c], c0); end
    end
  endtask

  initial begin
    int en [4], el [4], nov, rr [4], k;
    int seen_tie [4];
    start = 0; in_valid = 0; in_desc = '0; tab_raddr = '0; weighted = 0; lb_mode = LB_NONE;
    num_patches = '0; thresh = '0; set_lat(1, 3); gappy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- A: scattered, CBMF only
    en = '{0, 0, 0, 0}; el = '{0, 0, 0, 0}; nov = 0;
    for (int i = 0; i < N; i++) begin
      int b; longint a, n;
      b = $urandom_range(0, 3);
      n = 64'h8_0000;
      if (b > 0 && $urandom_range(0, 4) == 0) begin
        // straddle the boundary below bank b, more of it in bank b or below
        longint below; below = $urandom_range(1, 3) * 64'h2_0000 - 64'h1000;
        a = b * BS - below;
        exp_bank[i] = (below > n - below) ? b - 1 : b;
        en[b - 1]++; en[b]++; nov++;
      end else begin
        a = b * BS + longint'($urandom_range(0, 1000)) * n;
        exp_bank[i] = b; en[b]++;
      end
      el[exp_bank[i]]++;
      descs[i] = mk(a, n, i);
    end
    gappy = 1;
    run_job(LB_NONE, 0);
    gappy = 0;
    checks++;
    if (cycles != N + gaps + 3 + 4 * N + 2) begin failures++; $display("FAIL A cycles %0d exp %0d", cycles, N + gaps + 5 + 4 * N); end
    for (int b = 0; b < 4; b++) begin
      checks += 2;
      if (int'(n_cnt[b]) != en[b]) begin failures++; $display("FAIL N[%0d]=%0d exp %0d", b, n_cnt[b], en[b]); end
      if (int'(l_cnt[b]) != el[b]) begin failures++; $display("FAIL L[%0d]=%0d exp %0d", b, l_cnt[b], el[b]); end
    end
    checks++;
    if (int'(n_overlap) != nov) begin failures++; $display("FAIL overlaps %0d exp %0d", n_overlap, nov); end
    rr = '{0, 0, 0, 0};
    for (int i = 0; i < N; i++) begin
      int b; b = exp_bank[i];
      checks++;
      if (got_cl[i] != members[b][rr[b] % 6]) begin failures++; $display("FAIL A patch %0d on cluster %0d exp %0d", i, got_cl[i], members[b][rr[b] % 6]); end
      rr[b]++;
    end
    tab_raddr = pid_t'(7); #1;
    checks++;
    if (int'(tab_rdata.bank) != exp_bank[7]) begin failures++; $display("FAIL table readout"); end

    // ---- B, C, D: whole tensor in bank 0
    for (int i = 0; i < N; i++) begin descs[i] = mk(64'h1000_0000 + i * 64'h8_0000, 64'h8_0000, i); exp_bank[i] = 0; end
    run_job(LB_BANK, 0);
    checks += 2;
    if (!unbalanced || moves != 288) begin failures++; $display("FAIL B unbalanced %b moves %0d", unbalanced, moves); end
    if (cycles != N + 3 + 289 + 4 * N + 2) begin failures++; $display("FAIL B cycles %0d", cycles); end
    check_groups(96, 96, 96, 96);
    check_per_cluster(16, 0, NUM_CLUSTERS - 1);

    run_job(LB_BANK, 1);
    checks++;
    if (quota[0][0] != 192 || quota[0][1] != 64 || quota[0][2] != 64 || quota[0][3] != 64) begin
      failures++; $display("FAIL C quota %0d %0d %0d %0d", quota[0][0], quota[0][1], quota[0][2], quota[0][3]);
    end
    check_groups(192, 64, 64, 64);
    check_per_cluster(32, 0, 2);

    run_job(LB_CLUSTER, 0);
    check_per_cluster(16, 0, NUM_CLUSTERS - 1);
    checks++;
    if (moves != 0) begin failures++; $display("FAIL D moved at bank level"); end

    // ---- E: exact halves across the 1|2 boundary
    for (int i = 0; i < N; i++) descs[i] = mk(2 * BS - 64'h4_0000, 64'h8_0000, i);
    run_job(LB_NONE, 0);
    checks += 3;
    if (n_tie != pcnt_t'(N)) begin failures++; $display("FAIL E ties %0d", n_tie); end
    seen_tie = '{0, 0, 0, 0};
    for (int i = 0; i < N; i++) if (got_cl[i] >= 0) seen_tie[grp[got_cl[i]]]++;
    if (seen_tie[1] + seen_tie[2] != N) begin failures++; $display("FAIL E off the two banks"); end
    if (seen_tie[1] < N / 4 || seen_tie[2] < N / 4) begin failures++; $display("FAIL E draw uneven %0d/%0d", seen_tie[1], seen_tie[2]); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
