// sched_pkg -- shared sizes, types and helper functions of the batch scheduler.
//
// The scheduler steers the patches (batches) of a batched tensor onto the
// compute clusters that sit nearest to the memory bank holding each patch,
// then evens out the per-bank load. This package fixes the machine it is
// built for: M memory banks, Q compute clusters arranged in a grid of P
// columns, and up to MAX_PATCHES patches per job.
//
// What follows the paper: four memory banks, each owning one quadrant of the
// cluster grid (bank 0 top-left, bank 1 top-right, bank 2 bottom-left,
// bank 3 bottom-right), a batch size of 384 patches as in the BERT examples.
// What is this design's own choice: 24 clusters in a 6 x 4 grid, a flat
// 35-bit byte address space cut into 4 contiguous 8 GiB banks, 8-bit latency
// weights and the field widths below.
package sched_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned NUM_BANKS    = 4;    // M
  parameter int unsigned NUM_CLUSTERS = 24;   // Q
  parameter int unsigned GRID_COLS    = 6;    // P, clusters per grid row
  parameter int unsigned GRID_ROWS    = NUM_CLUSTERS / GRID_COLS;
  parameter int unsigned CL_PER_BANK  = NUM_CLUSTERS / NUM_BANKS;
  parameter int unsigned MAX_PATCHES  = 384;  // N (largest job)

  parameter int unsigned ADDR_W     = 35;     // device byte address
  parameter int unsigned BANK_SHIFT = 33;     // bank = addr[34:33]
  parameter int unsigned LEN_W      = 32;     // patch size in bytes
  parameter int unsigned ROW_W      = 24;     // row coordinate in 2-D layout
  parameter int unsigned LAT_W      = 8;      // latency weight
  parameter int unsigned COST_W     = 20;     // accumulated execution time

  parameter int unsigned BID_W  = $clog2(NUM_BANKS);
  parameter int unsigned CID_W  = $clog2(NUM_CLUSTERS);
  parameter int unsigned PID_W  = $clog2(MAX_PATCHES);
  parameter int unsigned PCNT_W = $clog2(MAX_PATCHES + 1);
  parameter int unsigned KID_W  = (CL_PER_BANK > 1) ? $clog2(CL_PER_BANK) : 1;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [LAT_W-1:0]  lat_t;
  typedef logic [COST_W-1:0] cost_t;
  typedef logic [BID_W-1:0]  bid_t;
  typedef logic [CID_W-1:0]  cid_t;
  typedef logic [PID_W-1:0]  pid_t;
  typedef logic [PCNT_W-1:0] pcnt_t;
  typedef logic [KID_W-1:0]  kid_t;

  // Geometry of a patch as handed to the templated kernel.
  typedef struct packed {
    addr_t addr;   // first byte of the patch
    row_t  row0;   // first row of the patch in the 2-D layout of the tensor
    row_t  rows;   // number of rows of the patch
  } geom_t;

  // One patch as it enters the scheduler.
  typedef struct packed {
    geom_t geom;
    len_t  bytes;  // size of the patch in memory
  } patch_desc_t;

  // One row of the patch <-> memory bank table.
  typedef struct packed {
    logic [NUM_BANKS-1:0] mask;     // H columns: bank holds part of the patch
    logic                 overlap;  // patch spans more than one bank
    bid_t                 bank;     // bank the patch is assigned to
    geom_t                geom;
  } bank_entry_t;

  // One row of the patch <-> cluster mapping register file.
  typedef struct packed {
    cid_t  cluster;
    pid_t  next;     // next patch of the same cluster (valid if not last)
    geom_t geom;
  } map_entry_t;

  // What a cluster CPU pops from its queue.
  typedef struct packed {
    pid_t  pid;
    geom_t geom;
  } queue_item_t;

  // Load balancing mode.
  typedef enum logic [1:0] {
    LB_NONE    = 2'd0,  // Cluster Beamforming only
    LB_BANK    = 2'd1,  // move patches from overloaded to under-loaded banks
    LB_CLUSTER = 2'd2   // place patches directly on the least loaded cluster
  } lb_mode_e;

  typedef lat_t [NUM_BANKS-1:0][NUM_BANKS-1:0] lat_tab_t;  // [bank][group]
  typedef pcnt_t [NUM_BANKS-1:0] bank_cnt_t;
  typedef pcnt_t [NUM_BANKS-1:0][NUM_BANKS-1:0] quota_t;  // [bank][group]

  // Job configuration of the top level.
  typedef struct packed {
    pcnt_t    num_patches;  // N, 1 .. MAX_PATCHES
    logic     src_ext;      // 1: patches come from the external stream
    addr_t    base_addr;    // tensor walker: first byte of the tensor
    len_t     patch_bytes;  // tensor walker: bytes per patch
    row_t     patch_rows;   // tensor walker: rows per patch
    lb_mode_e lb_mode;
    logic     weighted;     // weight moves by latency
    pcnt_t    thresh;       // unbalanced when max(L) - min(L) > thresh
    lat_tab_t lat;          // lat[b][g]: cost of a bank-b patch on group g
  } sched_cfg_t;

  // Bank group (nearest memory bank) of cluster c.
  function automatic bid_t group_of(cid_t c);
    int unsigned r, col;
    r   = int'(c) / GRID_COLS;
    col = int'(c) % GRID_COLS;
    if (NUM_BANKS == 4)
      return bid_t'(((r >= GRID_ROWS / 2) ? 2 : 0) + ((col >= GRID_COLS / 2) ? 1 : 0));
    else
      return bid_t'(int'(c) / CL_PER_BANK);
  endfunction

  // k-th cluster (0 .. CL_PER_BANK-1) of the group near bank g.
  function automatic cid_t member_of(bid_t g, kid_t k);
    int unsigned hc, r, col;
    if (NUM_BANKS == 4) begin
      hc  = GRID_COLS / 2;
      r   = (int'(g) / 2) * (GRID_ROWS / 2) + int'(k) / hc;
      col = (int'(g) % 2) * hc + int'(k) % hc;
      return cid_t'(r * GRID_COLS + col);
    end else begin
      return cid_t'(int'(g) * CL_PER_BANK + int'(k));
    end
  endfunction

endpackage
