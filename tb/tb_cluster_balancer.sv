// tb_cluster_balancer -- self-checking test of cluster_balancer.
// A reference list scheduler kept here (least finish time, then lower cost,
// then lower index) is run beside the block on random patch banks and
// latency tables, plain and weighted. A hand-worked case: 48 unit-cost
// patches of bank 0 spread to exactly 2 per cluster; weighted with near 1 and
// far 4, the first 6 patches of bank 0 land on bank 0's clusters 0,1,2,6,7,8.
module tb_cluster_balancer;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, take, weighted;
  bid_t bank;
  lat_tab_t lat;
  cid_t cluster;
  cost_t [NUM_CLUSTERS-1:0] cload;

  int ref_load [NUM_CLUSTERS];
  int checks = 0, failures = 0;
  int grp [NUM_CLUSTERS] = '{0,0,0,1,1,1, 0,0,0,1,1,1, 2,2,2,3,3,3, 2,2,2,3,3,3};

  cluster_balancer dut (.clk, .rst_n, .clear, .take, .bank, .weighted, .lat, .cluster, .cload);

  function automatic int ref_pick(int b);
    int best, bt, bc;
    best = 0; bt = 1 << 30; bc = 1 << 30;
    for (int cc = 0; cc < NUM_CLUSTERS; cc++) begin
      int pc, t;
      pc = weighted ? int'(lat[b][grp[cc]]) : 1;
      t = ref_load[cc] + pc;
      if (t < bt || (t == bt && pc < bc)) begin best = cc; bt = t; bc = pc; end
    end
    return best;
  endfunction

  task automatic do_clear();
    @(negedge clk); take = 0; clear = 1;
    @(negedge clk); clear = 0;
    foreach (ref_load[i]) ref_load[i] = 0;
  endtask

  task automatic one(int b, output int got);
    int e;
    @(negedge clk);
    bank = bid_t'(b); take = 1;
    #1;
    e = ref_pick(b);
    got = int'(cluster);
    checks++;
    if (got != e) begin failures++; $display("FAIL bank %0d got cluster %0d exp %0d", b, got, e); end
    ref_load[e] += weighted ? int'(lat[b][grp[e]]) : 1;
  endtask

  initial begin
    int got;
    automatic int first6 [6] = '{0, 1, 2, 6, 7, 8};
    clear = 0; take = 0; bank = '0; weighted = 0;
    for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++) lat[b][g] = (b == g) ? 1 : 4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    do_clear();
    repeat (48) one(0, got);
    @(negedge clk); take = 0;
    checks++;
    for (int cc = 0; cc < NUM_CLUSTERS; cc++) if (cload[cc] != 2) begin failures++; $display("FAIL cload[%0d]=%0d", cc, cload[cc]); break; end
    weighted = 1;
    do_clear();
    for (int i = 0; i < 6; i++) begin
      one(0, got);
      checks++;
      if (got != first6[i]) begin failures++; $display("FAIL near pick %0d got %0d", i, got); end
    end
    repeat (20) begin
      weighted = 1'($urandom_range(0, 1));
      for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++)
        lat[b][g] = lat_t'((b == g) ? $urandom_range(1, 3) : $urandom_range(2, 10));
      do_clear();
      repeat ($urandom_range(10, 200)) one($urandom_range(0, 3), got);
      @(negedge clk); take = 0;
      for (int cc = 0; cc < NUM_CLUSTERS; cc++) begin
        checks++;
        if (int'(cload[cc]) != ref_load[cc]) begin failures++; $display("FAIL load %0d", cc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
