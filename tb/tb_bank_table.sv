// tb_bank_table -- self-checking test of bank_table.
// Writes random rows for a full job of MAX_PATCHES patches, then reads every
// row back on both ports and compares the N and L column sums with sums
// kept here; finally checks that clear zeroes the sums.
module tb_bank_table;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, we;
  pid_t widx, raddr_a, raddr_b;
  bank_entry_t wdata, rdata_a, rdata_b;
  bank_cnt_t n_cnt, l_cnt;

  bank_entry_t shadow [MAX_PATCHES];
  int en_sum [NUM_BANKS], el_sum [NUM_BANKS];
  int checks = 0, failures = 0;

  bank_table dut (.clk, .rst_n, .clear, .we, .widx, .wdata, .raddr_a, .rdata_a,
                  .raddr_b, .rdata_b, .n_cnt, .l_cnt);

  initial begin
    clear = 0; we = 0; widx = '0; wdata = '0; raddr_a = '0; raddr_b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (en_sum[b]) begin en_sum[b] = 0; el_sum[b] = 0; end
    for (int i = 0; i < MAX_PATCHES; i++) begin
      bank_entry_t e;
      e.mask = 4'($urandom_range(1, 15));
      e.overlap = ($countones(e.mask) > 1);
      e.bank = bid_t'($urandom_range(0, 3));
      e.geom.addr = addr_t'({$urandom, $urandom});
      e.geom.row0 = row_t'($urandom);
      e.geom.rows = row_t'($urandom);
      shadow[i] = e;
      for (int b = 0; b < 4; b++) begin
        en_sum[b] += e.mask[b];
        el_sum[b] += (int'(e.bank) == b);
      end
      @(negedge clk); we = 1; widx = pid_t'(i); wdata = e;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < MAX_PATCHES; i++) begin
      raddr_a = pid_t'(i); raddr_b = pid_t'(MAX_PATCHES - 1 - i);
      #1;
      checks += 2;
      if (rdata_a != shadow[i]) begin failures++; $display("FAIL row %0d port a", i); end
      if (rdata_b != shadow[MAX_PATCHES - 1 - i]) begin failures++; $display("FAIL row port b"); end
    end
    for (int b = 0; b < 4; b++) begin
      checks += 2;
      if (int'(n_cnt[b]) != en_sum[b]) begin failures++; $display("FAIL N[%0d]=%0d exp %0d", b, n_cnt[b], en_sum[b]); end
      if (int'(l_cnt[b]) != el_sum[b]) begin failures++; $display("FAIL L[%0d]=%0d exp %0d", b, l_cnt[b], el_sum[b]); end
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++;
    if (n_cnt != '0 || l_cnt != '0) begin failures++; $display("FAIL clear"); end
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
