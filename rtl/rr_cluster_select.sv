// rr_cluster_select -- round-robin choice among the clusters near a bank.
//
// Cluster Beamforming schedules the patches of each bank in round-robin order
// onto the clusters nearest that bank. This block holds one pointer per bank
// group; `cluster` is the group's next cluster (combinational from `group`),
// and `take` advances that group's pointer, wrapping after CL_PER_BANK.
// Which clusters form a group comes from sched_pkg::member_of (quadrants of
// the cluster grid). Round-robin per bank follows the paper; the pointer
// reset to the group's first cluster at `clear` is this design's choice.
module rr_cluster_select
  import sched_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic take,
  input  bid_t group,
  output cid_t cluster
);

  kid_t ptr [NUM_BANKS];

  assign cluster = member_of(group, ptr[group]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NUM_BANKS; g++) ptr[g] <= '0;
    end else if (clear) begin
      for (int g = 0; g < NUM_BANKS; g++) ptr[g] <= '0;
    end else if (take) begin
      ptr[group] <= (ptr[group] == kid_t'(CL_PER_BANK - 1)) ? '0 : ptr[group] + 1'b1;
    end
  end

endmodule
