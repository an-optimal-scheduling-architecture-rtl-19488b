// tb_rr_cluster_select -- self-checking test of rr_cluster_select.
// The cluster groups of the 6 x 4 grid are written out here by hand
// (quadrants: bank 0 top-left ... bank 3 bottom-right). Random takes across
// the groups must visit each group's clusters in order and wrap; clear must
// restart every group at its first cluster.
module tb_rr_cluster_select;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, take;
  bid_t group;
  cid_t cluster;

  int grp_tab [4][6] = '{'{0, 1, 2, 6, 7, 8}, '{3, 4, 5, 9, 10, 11},
                          '{12, 13, 14, 18, 19, 20}, '{15, 16, 17, 21, 22, 23}};
  int ptr [4];
  int checks = 0, failures = 0;

  rr_cluster_select dut (.clk, .rst_n, .clear, .take, .group, .cluster);

  initial begin
    clear = 0; take = 0; group = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ptr[g]) ptr[g] = 0;
    repeat (500) begin
      @(negedge clk);
      group = bid_t'($urandom_range(0, 3));
      take = $urandom_range(0, 3) != 0;
      #1;
      checks++;
      if (int'(cluster) != grp_tab[group][ptr[group]]) begin
        failures++; $display("FAIL group %0d got %0d exp %0d", group, cluster, grp_tab[group][ptr[group]]);
      end
      if (take) ptr[group] = (ptr[group] + 1) % 6;
      if ($urandom_range(0, 99) == 0) begin
        @(negedge clk); take = 0; clear = 1;
        @(negedge clk); clear = 0;
        foreach (ptr[g]) ptr[g] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
