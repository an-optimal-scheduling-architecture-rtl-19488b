// tb_bank_mapper -- self-checking test of bank_mapper.
// Directed patches (inside one bank, straddling a bank boundary, ending
// exactly on a boundary, zero bytes, in the last bank) and random ones are
// compared with a reference computed here in 64-bit integers.
module tb_bank_mapper;
  import sched_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  addr_t addr;
  len_t  bytes;
  logic [NUM_BANKS-1:0] mask;
  logic  overlap;
  len_t [NUM_BANKS-1:0] portion;

  int checks = 0, failures = 0;

  bank_mapper dut (.addr(addr), .bytes(bytes), .mask(mask), .overlap(overlap), .portion(portion));

  task automatic check_one(longint unsigned a, longint unsigned n);
    longint unsigned bs, lo, hi, s, e, p;
    int nset;
    logic [NUM_BANKS-1:0] em;
    addr = addr_t'(a); bytes = len_t'(n);
    #1;
    bs = 64'd1 << 33;
    nset = 0; em = '0;
    for (int b = 0; b < 4; b++) begin
      lo = b * bs; hi = lo + bs;
      s = (a > lo) ? a : lo;
      e = ((a + n) < hi) ? (a + n) : hi;
      p = (e > s) ? e - s : 0;
      if (p != 0) begin em[b] = 1; nset++; end
      checks++;
      if (portion[b] != len_t'(p)) begin
        failures++; $display("FAIL a=%h n=%h bank %0d portion %h exp %h", a, n, b, portion[b], p);
      end
    end
    if (n == 0) begin em = '0; em[a >> 33] = 1'b1; nset = 1; end
    checks += 2;
    if (mask != em) begin failures++; $display("FAIL a=%h n=%h mask %b exp %b", a, n, mask, em); end
    if (overlap != (nset > 1)) begin failures++; $display("FAIL a=%h overlap %b", a, overlap); end
  endtask

  initial begin
    check_one(64'h0_0000_1000, 64'h8_0000);                // inside bank 0
    check_one(64'h1_FFFF_F000, 64'h2000);                  // straddles 0|1, equal halves
    check_one(64'h1_FFFF_F000, 64'h1000);                  // ends on the boundary
    check_one(64'h5_FFFF_0000, 64'h3_0000);                // straddles 2|3, more in 3
    check_one(64'h6_0000_0000, 0);                         // zero bytes, bank 3
    check_one(64'h7_FFFF_FF00, 64'h100);                   // last bytes of memory
    check_one(64'h1_FFFF_F000, 64'h2000);
    checks++; if (!(overlap && mask == 4'b0011 && portion[0] == portion[1])) failures++;
    repeat (2000) begin
      longint unsigned a, n;
      a = {$urandom, $urandom} & 64'h7_FFFF_FFFF;
      if ($urandom_range(0, 1)) a = (longint'($urandom_range(1, 3)) << 33) - $urandom_range(0, 65536);
      n = $urandom_range(0, 131072);
      if (a + n > (64'd1 << 35)) n = (64'd1 << 35) - a;
      check_one(a, n);
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
