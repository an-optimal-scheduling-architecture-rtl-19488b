// tb_cluster_patch_queue -- self-checking test of cluster_patch_queue.
// A register-file model here holds a linked list of 50 patches scattered
// over 384 entries. Grants and pops are random, so the FIFO fills and stalls
// the reader. Every popped item must be the next list element with its
// geometry; the queue must go idle after the last read. A second load with
// a one-entry list checks restart, and a zero-length list stays idle.
module tb_cluster_patch_queue;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, rd_req, rd_gnt, q_valid, q_ready, idle;
  pid_t head, rd_addr;
  pcnt_t count;
  map_entry_t rd_data;
  queue_item_t q_item;

  map_entry_t rf [MAX_PATCHES];
  int order [$];
  int popped, full_stalls;
  int checks = 0, failures = 0;
  bit gnt_en = 1;

  cluster_patch_queue dut (.clk, .rst_n, .load, .head, .count, .rd_req, .rd_addr, .rd_gnt,
                           .rd_data, .q_valid, .q_item, .q_ready, .idle);

  assign rd_data = rf[rd_addr];

  always_ff @(negedge clk) begin
    rd_gnt  <= rd_req && gnt_en && ($urandom_range(0, 2) != 0);
    q_ready <= ($urandom_range(0, 3) == 0);
  end

  always @(posedge clk) if (rst_n && !rd_req && count != 0 && !idle && !load) full_stalls++;

  always @(posedge clk) if (rst_n && q_valid && q_ready) begin
    checks += 2;
    if (popped >= order.size()) begin failures++; $display("FAIL extra item"); end
    else begin
      if (int'(q_item.pid) != order[popped]) begin failures++; $display("FAIL item %0d pid %0d exp %0d", popped, q_item.pid, order[popped]); end
      if (q_item.geom != rf[order[popped]].geom) begin failures++; $display("FAIL geom item %0d", popped); end
    end
    popped++;
  end

  task automatic build_list(int n);
    int used [int];
    order.delete();
    for (int i = 0; i < n; i++) begin
      int p;
      do p = $urandom_range(0, MAX_PATCHES - 1); while (used.exists(p));
      used[p] = 1;
      order.push_back(p);
      rf[p].cluster = '0;
      rf[p].geom = '{addr: addr_t'({$urandom, $urandom}), row0: row_t'(p), rows: row_t'(512)};
    end
    for (int i = 0; i + 1 < n; i++) rf[order[i]].next = pid_t'(order[i + 1]);
  endtask

  task automatic run_list(int n, int max_cycles);
    int cyc;
    build_list(n);
    popped = 0;
    @(negedge clk); load = 1; head = pid_t'((n > 0) ? order[0] : 0); count = pcnt_t'(n);
    @(negedge clk); load = 0;
    cyc = 0;
    while ((popped < n || !idle) && cyc < max_cycles) begin @(negedge clk); cyc++; end
    repeat (5) @(negedge clk);
    checks += 2;
    if (popped != n) begin failures++; $display("FAIL popped %0d of %0d", popped, n); end
    if (!idle || q_valid) begin failures++; $display("FAIL not idle at end"); end
  endtask

  initial begin
    load = 0; head = '0; count = '0; full_stalls = 0;
    foreach (rf[i]) rf[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_list(50, 5000);
    run_list(1, 100);
    run_list(0, 20);
    checks++;
    if (full_stalls == 0) begin failures++; $display("FAIL the FIFO never filled"); end
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
