// matsa_pkg: constants and types shared by the MATSA sDTW accelerator.
//
// The accelerator computes subsequence Dynamic Time Warping inside MRAM
// crossbars. Every operand is stored vertically, one bit per cell, down a
// column of a 256x256 crossbar, and every column works as one processing
// element. This package fixes the row map of a compute subarray (which rows
// hold the query element, the four S vectors, the reference element and the
// auxiliary cells) and the micro-operation that a subarray controller issues
// to its crossbar each cycle.
//
// From the paper: 256x256 crossbars, 32-bit elements (int32 evaluation
// type), the Q / S[i-1,j-1] / S[i-1,j] / S[i,j-1] / S[i,j] / R / aux row
// order of the compute subarray and 64 aux cells per column. The use of the
// individual aux rows and the micro-operation encoding are this design's own.
package matsa_pkg;

  // Crossbar geometry and element width.
  parameter int unsigned XB_ROWS = 256;
  parameter int unsigned XB_COLS = 256;
  parameter int unsigned W       = 32;   // bits per element (int32)
  parameter int unsigned ROW_AW  = 8;    // row address width

  typedef logic [ROW_AW-1:0] row_t;

  // Row map of a compute subarray. Each vector occupies W consecutive rows,
  // least significant bit at the lowest row.
  parameter row_t ROW_Q    = 8'd0;     // Q[i]        query element
  parameter row_t ROW_SDD  = 8'd32;    // S[i-1,j-1]
  parameter row_t ROW_SU   = 8'd64;    // S[i-1,j]
  parameter row_t ROW_SL   = 8'd96;    // S[i,j-1]
  parameter row_t ROW_S    = 8'd128;   // S[i,j]      current S_vector
  parameter row_t ROW_R    = 8'd160;   // R[j]        reference element
  // 64 aux rows (192..255)
  parameter row_t ROW_BEST = 8'd192;   // running min of the last S row (32 rows)
  parameter row_t ROW_C    = 8'd224;   // carry row
  parameter row_t ROW_T1   = 8'd225;   // bit temporaries
  parameter row_t ROW_T2   = 8'd226;
  parameter row_t ROW_T3   = 8'd227;
  parameter row_t ROW_F1   = 8'd228;   // comparison flags and their inverses
  parameter row_t ROW_NF1  = 8'd229;
  parameter row_t ROW_F2   = 8'd230;
  parameter row_t ROW_NF2  = 8'd231;
  parameter row_t ROW_SIGN = 8'd232;   // sign of Q-R
  parameter row_t ROW_ZERO = 8'd233;   // constant 0
  parameter row_t ROW_FIRST  = 8'd234; // column holds the first element of a query
  parameter row_t ROW_LAST   = 8'd235; // column holds the last element of a query
  parameter row_t ROW_VALID  = 8'd236; // column holds a reference element
  parameter row_t ROW_NFIRST = 8'd237;
  parameter row_t ROW_G      = 8'd238; // this column updates BEST this step

  // Sense function of the reconfigurable sense amplifier. The analog
  // thresholds are modelled as "number of activated 1-cells >= threshold".
  typedef enum logic [2:0] {
    SENSE_NONE = 3'd0,   // nothing activated: senses 0
    SENSE_MEM  = 3'd1,   // one row, threshold 1 (plain read)
    SENSE_OR   = 3'd2,   // two rows, threshold 1
    SENSE_AND  = 3'd3,   // two rows, threshold 2
    SENSE_MAJ  = 3'd4,   // three rows, threshold 2 (majority)
    SENSE_SUM  = 3'd5    // two rows: OR and AND sensed together, XOR, then XOR with the latch
  } sense_e;

  // One micro-operation: rows activated by the memory row decoder, the RSA
  // configuration and the destination row written in the second half cycle.
  typedef struct packed {
    sense_e sense;
    logic   inv;       // invert the sensed value
    logic   dc_sel;    // write the left neighbour's latch (diagonal copy) instead of the bitline result
    logic   latch_en;  // capture the result in the Carry/DC latch
    logic   we;        // write the destination row
    row_t   ra;        // activated rows
    row_t   rb;
    row_t   rc;
    row_t   rd;        // destination row
  } uop_t;

  parameter uop_t UOP_NOP = '{sense: SENSE_NONE, inv: 1'b0, dc_sel: 1'b0, latch_en: 1'b0,
                              we: 1'b0, ra: '0, rb: '0, rc: '0, rd: '0};

  // Programs a subarray controller runs for its MAT controller.
  typedef enum logic [1:0] {
    PROG_INIT  = 2'd0,   // write constant rows, clear flags
    PROG_LOADR = 2'd1,   // shift one reference element (and VALID) one column right
    PROG_SHIFT = 2'd2,   // shift query element and flags one column right only
    PROG_STEP  = 2'd3    // full wavefront step: distance, min, add, BEST, copies, shift
  } prog_e;

  // Bit that the first subarray of a chain receives on its dc_in.
  typedef enum logic [2:0] {
    FEED_INF   = 3'd0,   // all-ones: "infinity" left of column 0 for S and BEST
    FEED_Q     = 3'd1,   // bit of the next query element
    FEED_FIRST = 3'd2,   // next element is the first of its query
    FEED_LAST  = 3'd3,   // next element is the last of its query
    FEED_R     = 3'd4,   // bit of the next reference element (loading)
    FEED_VALID = 3'd5    // next reference element is a real one
  } feed_e;

  // Bit that leaves the last subarray of a chain on its dc_out.
  typedef enum logic [1:0] {
    CAP_NONE = 2'd0,
    CAP_BEST = 2'd1,     // bit of the BEST row of the last column
    CAP_LAST = 2'd2      // LAST flag of the last column
  } cap_e;

  // Work given to one MAT controller by the global controller.
  typedef struct packed {
    logic        self_join;   // queries are windows of the reference
    logic [31:0] ref_size;    // reference elements (at most the chain's columns)
    logic [31:0] qlen;        // elements per query
    logic [31:0] nq;          // queries handled by this MAT
    logic [31:0] win_base;    // self-join: start of this MAT's first window
    logic [31:0] win_stride;  // self-join: distance between its windows
  } mat_cfg_t;

  // Host-side modes (Listing 1 of the host interface).
  typedef enum logic {MODE_QUERY_FILTERING = 1'b0, MODE_SELF_JOIN = 1'b1} mode_e;
  typedef enum logic {DIST_ABS_DIFF = 1'b0, DIST_SQUARE_DIFF = 1'b1} dist_e;
  typedef enum logic {IN_REF = 1'b0, IN_QUERY = 1'b1} in_kind_e;

endpackage
