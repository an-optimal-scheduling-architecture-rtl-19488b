// tb_patch_walker -- self-checking test of patch_walker.
// A BERT-sized tensor (384 patches of 512 x 512 bf16, 512 KiB each) is
// walked at full rate, checking N cycles for N patches and every address,
// row and id. A second walk with random back-pressure checks that the
// stream holds still while stalled and that nothing is lost; a zero-patch
// start must not start.
module tb_patch_walker;
  import sched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, out_valid, out_ready, busy, done;
  addr_t base_addr;
  len_t patch_bytes;
  row_t patch_rows;
  pcnt_t num_patches;
  pid_t out_pid;
  patch_desc_t out_desc;

  int checks = 0, failures = 0;
  int seen, cycles;
  bit counting;

  patch_walker dut (.clk, .rst_n, .start, .base_addr, .patch_bytes, .patch_rows, .num_patches,
                    .out_valid, .out_ready, .out_pid, .out_desc, .busy, .done);

  always @(posedge clk) begin
    if (counting && busy) cycles++;
    if (rst_n && out_valid && out_ready) begin
      longint unsigned ea;
      ea = longint'(base_addr) + longint'(seen) * longint'(patch_bytes);
      checks += 4;
      if (int'(out_pid) != seen) begin failures++; $display("FAIL pid %0d exp %0d", out_pid, seen); end
      if (out_desc.geom.addr != addr_t'(ea)) begin failures++; $display("FAIL addr %h exp %h", out_desc.geom.addr, ea); end
      if (int'(out_desc.geom.row0) != seen * int'(patch_rows)) begin failures++; $display("FAIL row0"); end
      if (out_desc.bytes != patch_bytes || out_desc.geom.rows != patch_rows) begin failures++; $display("FAIL size"); end
      seen++;
    end
  end

  task automatic walk(int n, bit stall);
    seen = 0; cycles = 0; counting = 1;
    num_patches = pcnt_t'(n);
    @(negedge clk); start = 1; out_ready = !stall;
    @(negedge clk); start = 0;
    while (busy) begin
      @(negedge clk);
      if (stall) out_ready = $urandom_range(0, 2) == 0;
    end
    counting = 0;
    checks++;
    if (seen != n) begin failures++; $display("FAIL saw %0d of %0d", seen, n); end
  endtask

  initial begin
    start = 0; out_ready = 1;
    base_addr = 35'h0_4000_0000; patch_bytes = 32'h8_0000; patch_rows = 24'd512; num_patches = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    walk(384, 0);
    checks++;
    if (cycles != 384) begin failures++; $display("FAIL %0d cycles for 384 patches", cycles); end
    base_addr = 35'h1_FFF0_0000; patch_bytes = 32'h3_0000; patch_rows = 24'd96;
    walk(100, 1);
    num_patches = '0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (busy) begin failures++; $display("FAIL started with zero patches"); end
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
