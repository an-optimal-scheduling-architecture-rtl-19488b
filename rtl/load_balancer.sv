// load_balancer -- bank-level load balancing (second step of the scheduler).
//
// Input is L, the number of patches assigned to each bank by Cluster
// Beamforming. The load is called unbalanced when max(L) - min(L) exceeds a
// programmable threshold; a balanced load is left undisturbed. Otherwise
// patches are taken off the overloaded bank and virtually assigned to
// under-loaded banks: they stay where they are in memory but are executed by
// the clusters near another bank. The result is a quota matrix
// quota[b][g] = how many patches held in bank b run on the cluster group of
// bank g.
//
// The paper gives the rule (move load from overloaded to under-loaded banks,
// and in the weighted variant split it in inverse proportion of the
// latencies, so far clusters take less) and the MINIMAX goal (minimise the
// largest per-core execution time). The procedure is this design's own: a
// greedy descent on the group execution times T[g] = sum_b quota[b][g] *
// cost(b,g), with cost(b,g) = lat[b][g] when weighted and 1 otherwise.
// Each step takes the group with the largest T (lowest index on ties) and
// moves one of its own-bank patches to the group g where T[g] + cost(b,g) is
// least, provided that is below the current maximum. At balance each group
// finishes at about the same time, which puts patches on far groups in
// inverse proportion to their latency.
//
// Timing: `start` (one cycle) -> one INIT cycle -> one cycle per moved patch
// -> `done` pulses for one cycle; outputs hold until the next start.
// Only mode LB_BANK moves patches; any other mode returns the identity quota.
module load_balancer
  import sched_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  lb_mode_e    mode,
  input  logic        weighted,
  input  pcnt_t       thresh,
  input  bank_cnt_t   l_cnt,
  input  lat_tab_t    lat,
  output quota_t      quota,
  output cost_t [NUM_BANKS-1:0] gtime,
  output logic        unbalanced,
  output pcnt_t       moves,
  output logic        busy,
  output logic        done
);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_ITER} state_e;
  state_e state;
  logic   wgt_q, en_q;

  function automatic cost_t cost(bid_t b, bid_t g, logic w, lat_tab_t lt);
    return w ? cost_t'(lt[b][g]) : cost_t'(1);
  endfunction

  // --- imbalance test on L
  pcnt_t lmax, lmin;
  always_comb begin
    lmax = l_cnt[0];
    lmin = l_cnt[0];
    for (int b = 1; b < NUM_BANKS; b++) begin
      if (l_cnt[b] > lmax) lmax = l_cnt[b];
      if (l_cnt[b] < lmin) lmin = l_cnt[b];
    end
  end

  // --- one greedy step
  bid_t  bmax, gbest;
  cost_t cbest;
  logic  can_move;
  always_comb begin
    bmax = '0;
    for (int b = 1; b < NUM_BANKS; b++)
      if (gtime[b] > gtime[bmax]) bmax = bid_t'(b);
    gbest = '0;
    cbest = '1;
    for (int g = 0; g < NUM_BANKS; g++) begin
      cost_t c;
      c = gtime[g] + cost(bmax, bid_t'(g), wgt_q, lat);
      if (bid_t'(g) != bmax && c < cbest) begin
        cbest = c;
        gbest = bid_t'(g);
      end
    end
    can_move = (quota[bmax][bmax] != 0) && (cbest < gtime[bmax]) &&
               (moves != pcnt_t'(MAX_PATCHES));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      quota      <= '0;
      gtime      <= '0;
      unbalanced <= 1'b0;
      moves      <= '0;
      done       <= 1'b0;
      wgt_q      <= 1'b0;
      en_q       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          wgt_q <= weighted;
          en_q  <= (mode == LB_BANK);
          state <= S_INIT;
        end
        S_INIT: begin
          for (int b = 0; b < NUM_BANKS; b++) begin
            for (int g = 0; g < NUM_BANKS; g++)
              quota[b][g] <= (b == g) ? l_cnt[b] : '0;
            gtime[b] <= wgt_q ? cost_t'(l_cnt[b]) * cost_t'(lat[b][b]) : cost_t'(l_cnt[b]);
          end
          moves      <= '0;
          unbalanced <= (lmax - lmin) > thresh;
          if (en_q && ((lmax - lmin) > thresh)) state <= S_ITER;
          else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_ITER: begin
          if (can_move) begin
            quota[bmax][bmax]  <= quota[bmax][bmax] - 1'b1;
            quota[bmax][gbest] <= quota[bmax][gbest] + 1'b1;
            gtime[bmax]        <= gtime[bmax] - cost(bmax, bmax, wgt_q, lat);
            gtime[gbest]       <= cbest;
            moves              <= moves + 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
