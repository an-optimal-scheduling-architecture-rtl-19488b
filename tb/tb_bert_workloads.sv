// tb_bert_workloads -- the evaluated BERT batch workloads through the whole
// scheduler at its default size.
//
// Three batch-384 jobs that differ only in patch size (bf16 elements):
//   matmul (512x64)x(64x512): 128 KiB per patch (both operands)
//   matmul (512x512)x(512x64): 576 KiB per patch
//   softmax 512x512:          512 KiB per patch
// Each tensor is placed so that it starts 100.5 patches below the bank 1|2
// boundary: patch 100 straddles it with exactly half in each bank (an
// equal-portion draw), patches 0..99 lie in bank 1 and 101..383 in bank 2.
// Each job runs with weighted bank balancing (near 1, far 3) and then with
// Cluster Beamforming only. Checks: N and L sums, one overlap and one draw,
// every patch delivered once with its address, cycle counts from the
// documented formula, and that balancing lowers the largest group time.
module tb_bert_workloads;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 384;
  localparam longint BS = 64'd1 << 33;

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

  int got_n [N];
  longint pbytes;
  longint base;
  int checks = 0, failures = 0;

  assign q_ready = '1;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NUM_CLUSTERS; c++) if (q_valid[c]) begin
      int p; p = int'(q_item[c].pid);
      got_n[p]++;
      checks++;
      if (longint'(q_item[c].geom.addr) != base + p * pbytes) begin failures++; if (failures < 4) $display("FAIL patch %0d address %h exp %h", p, q_item[c].geom.addr, base + p * pbytes); end
    end
  end

  task automatic run(lb_mode_e m, output int cyc, output int tmax);
    foreach (got_n[i]) got_n[i] = 0;
    cfg.lb_mode = m;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    tmax = 0;
    for (int g = 0; g < 4; g++) if (int'(gtime[g]) > tmax) tmax = int'(gtime[g]);
    @(negedge clk);
    while (!(all_idle && q_valid == '0)) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got_n[i] != 1) begin failures++; $display("FAIL patch %0d delivered %0d times", i, got_n[i]); end
    end
    checks += 6;
    if (n_overlap != 1 || n_tie != 1) begin failures++; $display("FAIL overlap %0d tie %0d", n_overlap, n_tie); end
    if (n_cnt[1] != 101 || n_cnt[2] != 284 || n_cnt[0] != 0 || n_cnt[3] != 0) begin failures++; $display("FAIL N %0d %0d", n_cnt[1], n_cnt[2]); end
    if (int'(l_cnt[1]) + int'(l_cnt[2]) != N || !(l_cnt[1] == 100 || l_cnt[1] == 101)) begin failures++; $display("FAIL L %0d %0d", l_cnt[1], l_cnt[2]); end
    if (!unbalanced) begin failures++; $display("FAIL not flagged unbalanced"); end
    if (m == LB_NONE && moves != 0) begin failures++; $display("FAIL moved without balancing"); end
    if (cyc != N + 3 + 4 * N + 2 + ((moves != 0) ? int'(moves) + 1 : 0)) begin failures++; $display("FAIL %0d cycles, %0d moves", cyc, moves); end
  endtask

  initial begin
    longint sizes [3] = '{64'd131072, 64'd589824, 64'd524288};
    string names [3] = '{"matmul (512x64)x(64x512)", "matmul (512x512)x(512x64)", "softmax 512x512"};
    int cyc, t_bal, t_cbmf;
    start = 0; ext_valid = 0; ext_desc = '0; tab_raddr = '0;
    cfg = '0;
    cfg.num_patches = pcnt_t'(N); cfg.patch_rows = row_t'(512); cfg.thresh = pcnt_t'(8);
    cfg.weighted = 1;
    for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++) cfg.lat[b][g] = lat_t'((b == g) ? 1 : 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      pbytes = sizes[w];
      base = 2 * BS - 100 * pbytes - pbytes / 2;
      cfg.patch_bytes = len_t'(pbytes);
      cfg.base_addr = addr_t'(base);
      run(LB_BANK, cyc, t_bal);
      run(LB_NONE, cyc, t_cbmf);
      checks++;
      if (t_bal >= t_cbmf) begin failures++; $display("FAIL balancing did not help: %0d vs %0d", t_bal, t_cbmf); end
      $display("%s: largest group time %0d with balancing, %0d without", names[w], t_bal, t_cbmf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
