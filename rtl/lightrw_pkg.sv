// lightrw_pkg: types and constants shared by the LightRW random-walk pipeline.
//
// A LightRW instance walks graphs stored in compressed sparse row (CSR) form in one
// DRAM channel.  The memory bus is 512 bits wide and a neighbor (col_index entry) is a
// 32-bit word, so one bus beat carries K = 16 neighbors, the degree of parallelism the
// sampler is built for.  The packing of an edge into 32 bits, the row_index layout and the
// query context below are choices of this design; the source paper does not fix them.
//
//   col_index entry : {weight[31:28], relation[27:25], vertex[24:0]}
//   row_index entry : 64 bits {degree[63:32], address[31:0]}, 8 entries per 512-bit line
//   query record    : 32-bit start vertex, 16 per 512-bit line
package lightrw_pkg;

  localparam int BUS_W      = 512;            // memory data width (bits)
  localparam int ITEM_W     = 32;             // one col_index entry
  localparam int BEAT_ITEMS = BUS_W / ITEM_W; // 16 neighbors per beat
  localparam int VID_W      = 25;             // vertex id bits inside an edge word
  localparam int REL_W      = 3;              // edge relation label bits (MetaPath)
  localparam int EW_W       = 4;              // static edge weight bits
  localparam int MAX_PATH   = 16;             // entries of the MetaPath relation schema

  localparam logic [31:0] NO_VERTEX = 32'hFFFF_FFFF;

  typedef enum logic [0:0] {APP_METAPATH = 1'b0, APP_NODE2VEC = 1'b1} app_e;

  // State that travels with one step of one query through the whole pipeline.
  typedef struct packed {
    logic [31:0] qid;     // query index (selects the result slot)
    logic [7:0]  step;    // 0-based step number
    logic [7:0]  len;     // number of steps the query takes
    logic [31:0] v_curr;  // vertex the walker stands on
    logic [31:0] v_prev;  // vertex of the previous step (Node2Vec), NO_VERTEX at step 0
  } ctx_t;

  localparam int CTX_W = $bits(ctx_t);

  // Neighbor information of one vertex, as read from row_index.
  typedef struct packed {
    logic [31:0] deg;     // number of neighbors
    logic [31:0] addr;    // index of the first neighbor in col_index
  } ninfo_t;

  localparam int NINFO_W = $bits(ninfo_t);

  // Sampled result of one step.
  typedef struct packed {
    ctx_t        ctx;
    logic        found;   // 0: the vertex had no neighbor with non-zero weight
    logic [31:0] v_next;
  } sample_t;

  // Order record from the burst command generator to the intra burst merge: which
  // pipeline serves the next burst, how many beats it has, which col_index line it starts
  // at, and the neighbor range of the vertex so the merge can mask the items.
  typedef struct packed {
    logic        is_long;  // 1: long burst pipeline, 0: short
    logic        empty;    // vertex without neighbors: one masked beat, no memory access
    logic        last;     // final burst of the vertex
    logic [7:0]  beats;    // beats in this burst
    logic [31:0] line;     // first col_index line (relative to col_base)
    ninfo_t      vinfo;    // the vertex's neighbor range
  } burst_ord_t;

  function automatic logic [VID_W-1:0] edge_vid(input logic [ITEM_W-1:0] e);
    return e[VID_W-1:0];
  endfunction

  function automatic logic [REL_W-1:0] edge_rel(input logic [ITEM_W-1:0] e);
    return e[VID_W+REL_W-1:VID_W];
  endfunction

  function automatic logic [EW_W-1:0] edge_weight(input logic [ITEM_W-1:0] e);
    return e[ITEM_W-1:ITEM_W-EW_W];
  endfunction

endpackage
