// tb_load_balancer -- self-checking test of load_balancer.
// Hand-worked cases: a job wholly on bank 0 balanced plainly (2,2,2,2 of 8)
// and weighted with near latency 1 and far latency 3 (5 kept, 1 to each far
// group); a balanced load left undisturbed; mode LB_NONE leaving an
// unbalanced load alone. Random cases check that every quota row sums to
// L[b], that only bank-own patches move, that the largest group time did not
// grow, that no single further move would lower it, and the cycle count
// (start, INIT, one cycle per move and one final step when it balances).
module tb_load_balancer;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, weighted, unbalanced, busy, done;
  lb_mode_e mode;
  pcnt_t thresh, moves;
  bank_cnt_t l_cnt;
  lat_tab_t lat;
  quota_t quota;
  cost_t [NUM_BANKS-1:0] gtime;

  int checks = 0, failures = 0;

  load_balancer dut (.clk, .rst_n, .start, .mode, .weighted, .thresh, .l_cnt, .lat,
                     .quota, .gtime, .unbalanced, .moves, .busy, .done);

  task automatic run(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic int c(int b, int g);
    return weighted ? int'(lat[b][g]) : 1;
  endfunction

  task automatic set_lat(int near, int far);
    for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++)
      lat[b][g] = lat_t'((b == g) ? near : far);
  endtask

  task automatic expect_row0(int q0, int q1, int q2, int q3, int mv);
    checks += 5;
    if (quota[0][0] != pcnt_t'(q0)) begin failures++; $display("FAIL q00=%0d exp %0d", quota[0][0], q0); end
    if (quota[0][1] != pcnt_t'(q1)) begin failures++; $display("FAIL q01=%0d exp %0d", quota[0][1], q1); end
    if (quota[0][2] != pcnt_t'(q2)) begin failures++; $display("FAIL q02=%0d exp %0d", quota[0][2], q2); end
    if (quota[0][3] != pcnt_t'(q3)) begin failures++; $display("FAIL q03=%0d exp %0d", quota[0][3], q3); end
    if (int'(moves) != mv) begin failures++; $display("FAIL moves=%0d exp %0d", moves, mv); end
  endtask

  initial begin
    int cyc;
    start = 0; mode = LB_BANK; weighted = 0; thresh = 1; l_cnt = '0; set_lat(1, 3);
    repeat (2) @(posedge clk);
    rst_n = 1;

    // all 8 patches on bank 0, plain
    l_cnt[0] = 8; l_cnt[1] = 0; l_cnt[2] = 0; l_cnt[3] = 0;
    run(cyc);
    expect_row0(2, 2, 2, 2, 6);
    checks += 2;
    if (!unbalanced) begin failures++; $display("FAIL unbalanced flag"); end
    if (cyc != 6 + 3) begin failures++; $display("FAIL cycles %0d exp 9", cyc); end

    // weighted, near 1 far 3
    weighted = 1;
    run(cyc);
    expect_row0(5, 1, 1, 1, 3);
    checks++;
    if (gtime[0] != 5 || gtime[1] != 3) begin failures++; $display("FAIL gtime %0d %0d", gtime[0], gtime[1]); end

    // balanced: do not disturb
    weighted = 0;
    l_cnt[0] = 3; l_cnt[1] = 3; l_cnt[2] = 2; l_cnt[3] = 3;
    run(cyc);
    checks += 3;
    if (unbalanced) begin failures++; $display("FAIL balanced seen as unbalanced"); end
    if (moves != 0 || quota[0][0] != 3 || quota[2][2] != 2 || quota[0][1] != 0) begin failures++; $display("FAIL disturbed"); end
    if (cyc != 2) begin failures++; $display("FAIL cycles %0d exp 2", cyc); end

    // LB_NONE leaves an unbalanced load alone
    mode = LB_NONE;
    l_cnt[0] = 40; l_cnt[1] = 0; l_cnt[2] = 0; l_cnt[3] = 0;
    run(cyc);
    checks += 2;
    if (!unbalanced) begin failures++; $display("FAIL flag in LB_NONE"); end
    if (moves != 0 || quota[0][0] != 40) begin failures++; $display("FAIL moved in LB_NONE"); end

    // random
    mode = LB_BANK;
    repeat (300) begin
      int maxt0, maxt, tot;
      int t [4];
      weighted = 1'($urandom_range(0, 1));
      thresh = pcnt_t'($urandom_range(0, 4));
      tot = 0;
      for (int b = 0; b < 4; b++) begin
        l_cnt[b] = pcnt_t'(($urandom_range(0, 3) == 0) ? $urandom_range(0, 384 - tot) : $urandom_range(0, 20));
        if (tot + int'(l_cnt[b]) > 384) l_cnt[b] = '0;
        tot += int'(l_cnt[b]);
      end
      for (int b = 0; b < 4; b++) for (int g = 0; g < 4; g++)
        lat[b][g] = lat_t'((b == g) ? $urandom_range(1, 4) : $urandom_range(2, 12));
      maxt0 = 0;
      for (int b = 0; b < 4; b++) if (int'(l_cnt[b]) * c(b, b) > maxt0) maxt0 = int'(l_cnt[b]) * c(b, b);
      run(cyc);
      for (int g = 0; g < 4; g++) t[g] = 0;
      for (int b = 0; b < 4; b++) begin
        int rs; rs = 0;
        for (int g = 0; g < 4; g++) begin
          rs += int'(quota[b][g]);
          t[g] += int'(quota[b][g]) * c(b, g);
        end
        checks++;
        if (rs != int'(l_cnt[b])) begin failures++; $display("FAIL row %0d sums %0d exp %0d", b, rs, l_cnt[b]); end
      end
      maxt = 0;
      for (int g = 0; g < 4; g++) begin
        checks++;
        if (int'(gtime[g]) != t[g]) begin failures++; $display("FAIL gtime[%0d]=%0d exp %0d", g, gtime[g], t[g]); end
        if (t[g] > maxt) maxt = t[g];
      end
      checks += 2;
      if (maxt > maxt0) begin failures++; $display("FAIL max time grew %0d > %0d", maxt, maxt0); end
      if (cyc != int'(moves) + (unbalanced ? 3 : 2)) begin failures++; $display("FAIL cycles %0d moves %0d", cyc, moves); end
      if (unbalanced) begin
        // no single move of an own-bank patch from the busiest group improves it
        int bm; bm = 0;
        for (int g = 1; g < 4; g++) if (t[g] > t[bm]) bm = g;
        for (int g = 0; g < 4; g++) if (g != bm && quota[bm][bm] != 0) begin
          checks++;
          if (t[g] + c(bm, g) < t[bm]) begin failures++; $display("FAIL improvable move %0d->%0d", bm, g); end
        end
      end else begin
        checks++;
        if (moves != 0) begin failures++; $display("FAIL moved a balanced load"); end
      end
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
