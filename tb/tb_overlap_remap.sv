// tb_overlap_remap -- self-checking test of overlap_remap.
// Checks that a single-bank patch keeps its bank, that an overlapped patch
// goes to the bank with the largest portion, and that equal portions are
// resolved by the documented LFSR draw (reference LFSR kept here) with both
// banks drawn about equally often.
module tb_overlap_remap;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic [NUM_BANKS-1:0] mask;
  logic overlap;
  len_t [NUM_BANKS-1:0] portion;
  bid_t bank;
  logic tie;

  int checks = 0, failures = 0;
  logic [15:0] ref_lfsr = 16'hACE1;
  int hits [NUM_BANKS];

  overlap_remap dut (.clk, .rst_n, .en, .mask, .overlap, .portion, .bank, .tie);

  task automatic apply(logic [3:0] m, int p0, int p1, int p2, int p3, int exp_bank, bit exp_tie);
    int nt, k, seen, eb;
    mask = m; portion[0] = len_t'(p0); portion[1] = len_t'(p1);
    portion[2] = len_t'(p2); portion[3] = len_t'(p3);
    overlap = ($countones(m) > 1);
    en = 1;
    #1;
    eb = exp_bank;
    if (exp_tie) begin
      int mx; mx = 0;
      for (int b = 0; b < 4; b++) if (m[b] && portion[b] > mx) mx = portion[b];
      nt = 0; for (int b = 0; b < 4; b++) if (m[b] && portion[b] == mx) nt++;
      k = ref_lfsr % nt; seen = 0;
      for (int b = 0; b < 4; b++) if (m[b] && portion[b] == mx) begin if (seen == k) eb = b; seen++; end
    end
    checks += 2;
    if (int'(bank) != eb) begin failures++; $display("FAIL mask %b bank %0d exp %0d", m, bank, eb); end
    if (tie != exp_tie) begin failures++; $display("FAIL mask %b tie %b", m, tie); end
    hits[bank]++;
    @(posedge clk);
    if (exp_tie) ref_lfsr = {1'b0, ref_lfsr[15:1]} ^ (ref_lfsr[0] ? 16'hB400 : 16'h0);
    #1;
  endtask

  initial begin
    en = 0; mask = '0; overlap = 0; portion = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    apply(4'b0100, 0, 0, 4096, 0, 2, 0);
    apply(4'b0001, 77, 0, 0, 0, 0, 0);
    apply(4'b0011, 100, 300, 0, 0, 1, 0);
    apply(4'b1100, 0, 0, 900, 100, 2, 0);
    apply(4'b0110, 0, 5, 6, 0, 2, 0);
    foreach (hits[i]) hits[i] = 0;
    repeat (1000) apply(4'b0011, 2048, 2048, 0, 0, 0, 1);
    checks++;
    if (hits[0] < 400 || hits[1] < 400) begin
      failures++; $display("FAIL uneven draw %0d/%0d", hits[0], hits[1]);
    end
    repeat (500) begin
      int a, b2;
      a = $urandom_range(1, 1000); b2 = $urandom_range(1, 1000);
      if (a == b2) apply(4'b1010, 0, a, 0, b2, 0, 1);
      else apply(4'b1010, 0, a, 0, b2, (a > b2) ? 1 : 3, 0);
    end
    en = 0;
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
