// overlap_remap -- assigns a patch to exactly one memory bank.
//
// A patch that lies in a single bank keeps that bank. An OVERLAP'ed patch is
// re-mapped to the bank holding the largest portion of it; when several
// banks hold equal largest portions, one of them is drawn with equal
// probability. Both rules follow the paper. The draw is this design's choice:
// a 16-bit Galois LFSR (taps x^16+x^14+x^13+x^11+1, seeded 16'hACE1 at reset)
// whose value modulo the number of tied banks selects the k-th tied bank, in
// increasing bank order. The LFSR steps once per accepted tie (`en && tie`).
//
// The selection is combinational from the inputs and the LFSR state.
module overlap_remap
  import sched_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,        // the patch on the inputs is taken
  input  logic [NUM_BANKS-1:0]  mask,
  input  logic                  overlap,
  input  len_t [NUM_BANKS-1:0]  portion,
  output bid_t                  bank,
  output logic                  tie        // an equal-portion draw was made
);

  logic [15:0] lfsr;
  len_t        maxv;
  logic [NUM_BANKS-1:0] tied;
  int unsigned ntied, k, seen;

  always_comb begin
    maxv = '0;
    for (int b = 0; b < NUM_BANKS; b++)
      if (mask[b] && portion[b] > maxv) maxv = portion[b];
    ntied = 0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      tied[b] = mask[b] && (portion[b] == maxv);
      if (tied[b]) ntied++;
    end
    tie = overlap && (ntied > 1);
    k   = (ntied > 1) ? (int'(lfsr) % ntied) : 0;
    bank = '0;
    seen = 0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      if (tied[b]) begin
        if (seen == k) bank = bid_t'(b);
        seen++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        lfsr <= SEED;
    else if (en && tie) lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
  end

endmodule
