// hnsw_pkg: constants and types shared by the HNSW search accelerator.
//
// The vector format (128 dimensions of 8-bit elements, 1024 bits per vector), the
// memory-port widths of the DMA engines, the ef/K values, the 5M-point visited list
// and the top cached layers (6 down to 3) follow the paper. Field widths of the
// index-table entry, the configuration record and the result word are this
// design's own choice and are documented next to each type.
package hnsw_pkg;

  // ---- vector format (paper: SIFT, 128-d, byte elements) ----
  localparam int unsigned DIM        = 128;
  localparam int unsigned ELEM_W     = 8;
  localparam int unsigned VEC_W      = DIM * ELEM_W;       // 1024 bits
  localparam int unsigned PE_PER_UNIT = 16;                // paper: 16 PEs per unit
  localparam int unsigned NUM_UNITS  = 8;                  // paper: 8 units

  // ---- distances and indices ----
  localparam int unsigned DIST_W = 32;   // max 128*255^2 = 8,323,200 fits in 23 bits
  localparam int unsigned IDX_W  = 32;
  localparam int unsigned ADDR_W = 32;   // 4 GB DRAM on the device

  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // ---- graph geometry ----
  localparam int unsigned MAX_LAYER      = 6;   // paper: layer 6 is the top
  localparam int unsigned LAYER_W        = 3;
  localparam int unsigned MAXM           = 16;  // assumed (HNSW M=16 for SIFT)
  localparam int unsigned MAXM0          = 2 * MAXM;   // paper: maxM0 = 2 x maxM
  localparam int unsigned CACHE_MIN_LAYER = 3;  // paper: layers 6..3 cached on chip
  localparam int unsigned LIST_W         = MAXM * IDX_W; // 512 bits = one list beat

  typedef logic [LAYER_W-1:0] layer_t;

  // Index-table entry: one 32-bit word per layer of a 64-byte row.
  //   [31:26] size of the neighbour list (0..MAXM0)
  //   [25:0]  pointer: row of the list table of that layer
  typedef struct packed {
    logic [5:0]  size;
    logic [25:0] ptr;
  } idx_entry_t;

  // One element of the index stream between list DMA and comparator.
  typedef struct packed {
    logic nil;    // empty neighbour list: no index, no distance follows
    logic last;   // last element of the current neighbour list
    idx_t idx;
  } nbr_t;

  // Id + vector handed from the query DMA to a computing module.
  localparam int unsigned QID_W = 16;
  typedef struct packed {
    logic [QID_W-1:0] qid;
    logic [VEC_W-1:0] vec;
  } query_t;

  // Result word (64 bits): written/read by the output DMA.
  typedef struct packed {
    dist_t dval;
    idx_t  idx;
  } result_t;

  // Configuration record, two 256-bit beats read by the parameter DMA.
  typedef struct packed {
    // beat 1 (bits 511:256)
    logic [63:0]      reserved;
    addr_t            result_base;   // K results of 64 bits per query
    addr_t            list_up_base;  // upper-layer list table, rows of 64 B, top layer first
    addr_t            list0_base;    // layer-0 list table, rows of 128 B
    addr_t            index_base;    // index table, rows of 64 B
    addr_t            raw_base;      // raw data table, rows of 128 B
    addr_t            query_base;    // queries, 128 B each
    // beat 0 (bits 255:0)
    logic [146:0]     reserved0;
    logic             first_graph;   // no earlier results to merge with
    idx_t             graph_base_id; // added to local indices to form global ids
    logic [15:0]      cached_rows;   // upper list rows (layers 6..3) held on chip
    logic [QID_W-1:0] num_queries;
    logic [7:0]       ef;
    idx_t             enter_point;
    logic [3:0]       max_layer;
  } config_t;

  // Event counters of one computing module (for tests and performance study).
  typedef struct packed {
    logic [31:0] queries;      // queries finished
    logic [31:0] up_moves;     // upper layer: closer point found, same layer again
    logic [31:0] layer_drops;  // upper layer: local minimum, one layer down
    logic [31:0] visited_hits; // layer 0: neighbour already visited, skipped
    logic [31:0] inserts;      // layer 0: neighbour put into candidate and final list
    logic [31:0] evictions;    // layer 0: final list full, furthest dropped
    logic [31:0] rejects;      // layer 0: neighbour not closer than the final list
    logic [31:0] end_empty;    // search ended: candidate list empty
    logic [31:0] end_dist;     // search ended: best candidate beyond final list
  } cmp_stats_t;

endpackage
