// phnsw_pkg: types and constants shared by the pHNSW search processor.
//
// The processor searches a hierarchical navigable small-world (HNSW) graph for the
// nearest neighbours of a query. Every point exists twice in off-chip memory: as a
// 128-dimensional vector and as a 15-dimensional PCA projection. Vectors are held as
// 32-bit two's-complement words (4 bytes per dimension); distances are squared
// Euclidean and carried at full precision (DIST_W bits), so no rounding occurs.
//
// Off-chip memory is read in 64-byte bursts ("rows" of 16 words). A neighbour-list
// entry of a layer with m neighbours is m*64 bytes: m 32-bit indices followed by the
// m 15-dimensional vectors, i.e. m/16 rows of indices then 15*m/16 rows of vectors.
// This layout, the dimensions, the per-layer filter sizes k and list sizes ef come
// from the published design; the number format, the row width and the address width
// are this implementation's choices.
package phnsw_pkg;

  localparam int ELEM_W   = 32;              // bits per vector dimension
  localparam int D_HIGH   = 128;             // original dimension
  localparam int D_LOW    = 15;              // PCA dimension
  localparam int SQ_W     = 2 * (ELEM_W + 1);                  // one squared difference
  localparam int DIST_W   = SQ_W + $clog2(D_HIGH);             // squared-L2 width
  localparam int IDX_W    = 32;              // point index width
  localparam int ADDR_W   = 40;              // byte address of off-chip memory
  localparam int ROW_WORDS = 16;             // 32-bit words per 64-byte row / burst
  localparam int ROW_W    = ROW_WORDS * 32;  // 512
  localparam int N_SORT   = 16;              // kSort.L / Dist.L width
  localparam int N_LAYERS = 6;               // layers 0..5
  localparam int M_UP     = 16;              // neighbours per node, layers 1..5
  localparam int M_L0     = 32;              // neighbours per node, layer 0
  localparam int HI_ROWS  = D_HIGH / ROW_WORDS;  // 8 rows per high-dim vector

  typedef logic [DIST_W-1:0]       dist_t;
  typedef logic [IDX_W-1:0]        idx_t;
  typedef logic [ADDR_W-1:0]       addr_t;
  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef logic [ROW_W-1:0]        row_t;

  localparam idx_t  INVALID_IDX = '1;        // marks an unused neighbour slot
  localparam dist_t DIST_MAX    = '1;

  typedef struct packed {
    idx_t  idx;
    dist_t dval;
  } cand_t;

  // Event counters of one search, for performance analysis.
  typedef struct packed {
    logic [31:0] iters;        // candidates expanded (outer-loop iterations)
    logic [31:0] breaks;       // layer searches ended by the distance test
    logic [31:0] merges;       // second-batch kSort.L merges (layer 0)
    logic [31:0] visit_hits;   // top-k candidates skipped as already visited
    logic [31:0] hd_fetches;   // high-dimensional vectors fetched
    logic [31:0] rmf;          // removals of the furthest F entry
    logic [31:0] cycles;       // clock cycles from start to done
  } stats_t;

  // Filter size k, list size ef and neighbour count m of a layer.
  function automatic int k_of(input int layer);
    return (layer == 0) ? 16 : (layer == 1) ? 8 : 3;
  endfunction
  function automatic int ef_of(input int layer);
    return (layer == 0) ? 10 : 1;
  endfunction
  function automatic int m_of(input int layer);
    return (layer == 0) ? M_L0 : M_UP;
  endfunction

  // Squared difference of two dimensions, exact.
  function automatic logic [SQ_W-1:0] sqdiff(input elem_t a, input elem_t b);
    logic signed [SQ_W-1:0] d;
    d = SQ_W'(a) - SQ_W'(b);   // sign-extending casts
    return $unsigned(d * d);
  endfunction

endpackage
