// patch_walker -- turns a whole-tensor descriptor into a stream of patch
// descriptors, one per clock.
//
// The whole tensor of a batch algorithm is N patches laid out one after the
// other in device memory (a stack of N slices of R rows each, as in the
// 512*384 x 512 BERT layout). Given the tensor's base address, the size of one
// patch in bytes and in rows, and N, the walker emits patch i with address
// base + i*bytes, first row i*rows and the patch size. That the whole tensor
// is handed to the scheduler follows the paper; the back-to-back layout and
// this descriptor format are this design's choice.
//
// Interface: pulse `start` (ignored while busy) with the tensor fields valid.
// The output is a valid/ready stream; `pid` numbers the patches from 0.
// `done` pulses one cycle after the last patch is accepted. Throughput is one
// patch per cycle when `out_ready` stays high.
module patch_walker
  import sched_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       base_addr,
  input  len_t        patch_bytes,
  input  row_t        patch_rows,
  input  pcnt_t       num_patches,
  output logic        out_valid,
  input  logic        out_ready,
  output pid_t        out_pid,
  output patch_desc_t out_desc,
  output logic        busy,
  output logic        done
);

  addr_t cur_addr;
  row_t  cur_row;
  pcnt_t idx;
  pcnt_t total;
  len_t  bytes_q;
  row_t  rows_q;

  assign out_valid            = busy;
  assign out_pid              = pid_t'(idx);
  assign out_desc.geom.addr   = cur_addr;
  assign out_desc.geom.row0   = cur_row;
  assign out_desc.geom.rows   = rows_q;
  assign out_desc.bytes       = bytes_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      cur_addr <= '0;
      cur_row  <= '0;
      idx      <= '0;
      total    <= '0;
      bytes_q  <= '0;
      rows_q   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && num_patches != 0) begin
          busy     <= 1'b1;
          cur_addr <= base_addr;
          cur_row  <= '0;
          idx      <= '0;
          total    <= num_patches;
          bytes_q  <= patch_bytes;
          rows_q   <= patch_rows;
        end
      end else if (out_ready) begin
        cur_addr <= cur_addr + addr_t'(bytes_q);
        cur_row  <= cur_row + rows_q;
        idx      <= idx + 1'b1;
        if (idx == total - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A stream item may not change or vanish while it waits for `out_ready`.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_desc) && $stable(out_pid));

endmodule
