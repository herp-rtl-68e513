// herp_pkg: sizes and shared types of the HERP bucket-search / cluster-expansion accelerator.
//
// HV_DIM (2048) and the 128x128 CAM array size are the published configuration. The
// distance width covers 0..HV_DIM. Bucket IDs are 14 bits, enough for Eq. 1 bucket indices
// of precursors up to m/z 4096 at charge 4; this width, the query tag width and the
// threshold encoding are choices of this design, not published values.
// The three HERP_* sizes are the defaults of herp_top; a block compiled on its own does not
// read them, so a lint of that block reports them as unused.
package herp_pkg;
  localparam int unsigned HERP_HV_DIM   = 2048;  // hypervector dimension
  localparam int unsigned HERP_ARR_ROWS = 128;   // rows of one SOT-CAM array
  localparam int unsigned HERP_ARR_COLS = 128;   // columns of one SOT-CAM array
  localparam int unsigned BUCKET_W = 14;    // bucket index width
  localparam int unsigned QID_W    = 16;    // query tag width

  typedef logic [BUCKET_W-1:0] bucket_t;
  typedef logic [QID_W-1:0]    qid_t;

  // Result of one query: which cluster it went to and how.
  typedef struct packed {
    qid_t    qid;        // query tag given at input
    bucket_t bucket;     // bucket searched
    logic [15:0] row;    // cluster index inside the bucket (CAM row)
    logic [15:0] distance;   // minimum Hamming distance found (0 for an empty bucket)
    logic    is_new;     // 1: outlier, a new cluster was defined at `row`
    logic    overflow;   // 1: outlier but the bucket was full, no cluster assigned
  } result_t;
endpackage
