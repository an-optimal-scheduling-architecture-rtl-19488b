// cluster_balancer -- cluster-level load balancing.
//
// The variant of load balancing that works on compute clusters rather than on
// banks: each patch goes directly to the cluster that would finish it
// earliest, counting the cluster's accumulated execution time plus the cost
// of this patch on it, cost = lat[bank][group_of(cluster)] when weighted and
// 1 otherwise. This is a greedy (list-scheduling) answer to the MINIMAX
// problem of the paper: minimise the largest total execution time of any
// core, with a patch's time a function of its distance to the core. Ties go
// to the lower cost (the nearer cluster), then to the lower cluster index.
// The paper names the variant and the goal; the greedy rule is this design's.
//
// `cluster` is combinational from `bank`; `take` adds the cost to that
// cluster's accumulated time. `clear` zeroes all times.
module cluster_balancer
  import sched_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      take,
  input  bid_t      bank,
  input  logic      weighted,
  input  lat_tab_t  lat,
  output cid_t      cluster,
  output cost_t [NUM_CLUSTERS-1:0] cload
);

  cost_t sel_cost;

  always_comb begin
    cost_t best_t, best_c;
    cluster = '0;
    best_t  = '1;
    best_c  = '1;
    for (int c = 0; c < NUM_CLUSTERS; c++) begin
      cost_t pc, t;
      pc = weighted ? cost_t'(lat[bank][group_of(cid_t'(c))]) : cost_t'(1);
      t  = cload[c] + pc;
      if (t < best_t || (t == best_t && pc < best_c)) begin
        best_t  = t;
        best_c  = pc;
        cluster = cid_t'(c);
      end
    end
    sel_cost = best_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cload <= '0;
    end else if (clear) begin
      cload <= '0;
    end else if (take) begin
      cload[cluster] <= cload[cluster] + sel_cost;
    end
  end

endmodule
