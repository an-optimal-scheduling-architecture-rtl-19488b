// tb_map_regfile -- self-checking test of map_regfile.
// Appends every patch of a 384-patch job to a random cluster, keeping the
// expected per-cluster lists here, then walks each cluster's linked list
// through the read port and compares order, cluster field, geometry and
// counts; then checks that clear empties every list.
module tb_map_regfile;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, we;
  pid_t pid, raddr;
  cid_t cluster;
  geom_t geom;
  map_entry_t rdata;
  pid_t  [NUM_CLUSTERS-1:0] head;
  pcnt_t [NUM_CLUSTERS-1:0] count;

  int lists [NUM_CLUSTERS][$];
  geom_t geoms [MAX_PATCHES];
  int checks = 0, failures = 0;

  map_regfile dut (.clk, .rst_n, .clear, .we, .pid, .cluster, .geom, .raddr, .rdata, .head, .count);

  initial begin
    clear = 0; we = 0; pid = '0; raddr = '0; cluster = '0; geom = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < MAX_PATCHES; i++) begin
      int c, p;
      c = (i < 40) ? 5 : $urandom_range(0, NUM_CLUSTERS - 2);  // cluster 23 stays empty
      p = (i * 97) % MAX_PATCHES;                                // out-of-order patch ids
      geoms[p] = '{addr: addr_t'({$urandom, $urandom}), row0: row_t'($urandom), rows: row_t'($urandom)};
      lists[c].push_back(p);
      @(negedge clk); we = 1; pid = pid_t'(p); cluster = cid_t'(c); geom = geoms[p];
    end
    @(negedge clk); we = 0;
    for (int c = 0; c < NUM_CLUSTERS; c++) begin
      pid_t pt;
      checks++;
      if (int'(count[c]) != lists[c].size()) begin failures++; $display("FAIL count[%0d]=%0d exp %0d", c, count[c], lists[c].size()); end
      pt = head[c];
      foreach (lists[c][k]) begin
        raddr = pt; #1;
        checks += 3;
        if (int'(pt) != lists[c][k]) begin failures++; $display("FAIL cluster %0d item %0d pid %0d exp %0d", c, k, pt, lists[c][k]); end
        if (int'(rdata.cluster) != c) begin failures++; $display("FAIL cluster field"); end
        if (rdata.geom != geoms[lists[c][k]]) begin failures++; $display("FAIL geom"); end
        pt = rdata.next;
      end
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++;
    if (count != '0) begin failures++; $display("FAIL clear"); end
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
