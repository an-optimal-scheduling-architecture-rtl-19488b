// bank_mapper -- one row of the patch <-> memory bank table.
//
// For a patch occupying bytes [addr, addr+bytes) the mapper works out, for
// every bank b, how many of those bytes lie in bank b. A bank with a non-zero
// portion gets its H column set; the OVERLAP flag is set when more than one
// column is. The table row, the OVERLAP flag and the use of the portions to
// decide among banks follow the paper. The address map is this design's
// choice: bank b owns the contiguous range [b << BANK_SHIFT, (b+1) << BANK_SHIFT).
// A patch of zero bytes is mapped to the bank of its start address.
//
// Purely combinational; the scheduler registers the result in the table.
module bank_mapper
  import sched_pkg::*;
(
  input  addr_t                 addr,
  input  len_t                  bytes,
  output logic [NUM_BANKS-1:0]  mask,
  output logic                  overlap,
  output len_t [NUM_BANKS-1:0]  portion
);

  localparam int unsigned EW = ADDR_W + 1;
  typedef logic [EW-1:0] ext_t;

  ext_t lo, hi;
  int   nset;

  always_comb begin
    lo = {1'b0, addr};
    hi = lo + ext_t'(bytes);
    nset = 0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      ext_t blo, bhi, s, e;
      blo = ext_t'(unsigned'(b)) << BANK_SHIFT;
      bhi = ext_t'(unsigned'(b + 1)) << BANK_SHIFT;
      s   = (lo > blo) ? lo : blo;
      e   = (hi < bhi) ? hi : bhi;
      portion[b] = (e > s) ? len_t'(e - s) : '0;
      mask[b]    = (e > s);
      if (e > s) nset++;
    end
    if (bytes == 0) begin
      mask = '0;
      mask[addr[ADDR_W-1 -: BID_W]] = 1'b1;
      nset = 1;
    end
    overlap = (nset > 1);
  end

endmodule
