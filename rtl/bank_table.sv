// bank_table -- the patch <-> memory bank mapping table.
//
// One entry per patch holds the H columns (banks that hold part of the
// patch), the OVERLAP flag, the bank the patch was finally assigned to and
// the patch geometry. While entries are written the table keeps the column
// sums the paper calls N (patches created on each bank; an overlapped patch
// counts on every bank it touches, so the N sum may exceed the patch count)
// and L (patches assigned to each bank; the L sum equals the patch count).
//
// The table is a register array written at one port and read at two
// asynchronous ports: one for the scheduler, one for status readout by the
// host. `clear` zeroes the counters (entries are overwritten by the next job).
// The table contents follow the paper; the ports are this design's choice.
module bank_table
  import sched_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_PATCHES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        we,
  input  pid_t        widx,
  input  bank_entry_t wdata,
  input  pid_t        raddr_a,
  output bank_entry_t rdata_a,
  input  pid_t        raddr_b,
  output bank_entry_t rdata_b,
  output bank_cnt_t   n_cnt,      // created on bank (H column sums)
  output bank_cnt_t   l_cnt       // assigned to bank
);

  bank_entry_t mem [DEPTH];

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];

  always_ff @(posedge clk) begin
    if (we) mem[widx] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cnt <= '0;
      l_cnt <= '0;
    end else if (clear) begin
      n_cnt <= '0;
      l_cnt <= '0;
    end else if (we) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        n_cnt[b] <= n_cnt[b] + pcnt_t'(wdata.mask[b]);
        l_cnt[b] <= l_cnt[b] + pcnt_t'(wdata.bank == bid_t'(b));
      end
    end
  end

  a_widx: assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(widx) < DEPTH);

endmodule
