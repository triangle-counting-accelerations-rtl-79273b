// tc_pkg: types and constants shared by the triangle-counting in-memory
// accelerator.
//
// The slice length of 64 bits is the one the design is built around: every
// row and column of the adjacency matrix is cut into 64-bit slices, one slice
// fills one word (one physical row) of a computational STT-MRAM mat, and the
// sense amplifiers of a mat return 64 bits at a time. The operation codes of
// the memory array and the encoding of the "next visit" key used by the
// Priority replacement policy are this design's own choices.
package tc_pkg;

  // Slice length |S| in bits, and its log2.
  localparam int unsigned SLICE_W    = 64;
  localparam int unsigned SLICE_LOG2 = 6;

  // Ways per set of the storage-status table (the memory is organised like an
  // 8-way cache).
  localparam int unsigned WAYS = 8;

  // Operation issued to the computational memory array.
  typedef enum logic [1:0] {
    MOP_NOP   = 2'd0,
    MOP_WRITE = 2'd1,   // column driver writes one 64-bit word
    MOP_READ  = 2'd2,   // one word line raised, SA uses the READ reference
    MOP_AND   = 2'd3    // two word lines raised, SA uses the AND reference
  } mem_op_e;

  // Orientation of a line of the adjacency matrix.
  typedef enum logic {
    DIR_ROW = 1'b0,
    DIR_COL = 1'b1
  } line_dir_e;

  // Event counters of one triangle-counting run.
  typedef struct packed {
    logic [31:0] nnz;        // non-zero elements A[i][j] visited
    logic [31:0] pairs;      // valid slice pairs computed (AND + BitCount)
    logic [31:0] skipped;    // slices stepped over because the other side was invalid
    logic [31:0] col_hit;    // column slice found in memory (reuse, no WRITE)
    logic [31:0] col_miss;   // column slice written into memory
    logic [31:0] evict;      // misses that swapped a resident slice out
    logic [31:0] row_write;  // row slice written into a mat's row-slice line
    logic [31:0] row_reuse;  // row slice already in place
  } tc_stats_t;

endpackage
