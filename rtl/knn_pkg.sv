// knn_pkg: types and default sizes shared by the exact kNN accelerator.
//
// The accelerator compares query vectors with dataset vectors by squared
// Euclidean distance and keeps, per query, the k closest dataset vectors.
// Vectors travel over a memory word of BUS_W bits that carries W elements of
// ELEM_W bits each; a vector of d elements takes r = ceil(d/W) words ("beats"),
// zero-padded in the last one.  Distances and vector indices travel as a pair
// (pair_t); the kNN queue moves queue items (qitem_t) that also carry an
// end-of-stream marker and a "solution" mark.
//
// The accumulation depth M_ACC = 8 is the value of m reported for the
// original design.  The element format (16-bit signed integers), the 512-bit
// memory word, and the index and distance widths are choices of this design.
package knn_pkg;

  // Element and memory word
  parameter int unsigned ELEM_W = 16;              // signed fixed-point element
  parameter int unsigned BUS_W  = 512;             // one memory read (HBM port width)
  parameter int unsigned W      = BUS_W / ELEM_W;  // elements per beat (w)
  parameter int unsigned M_ACC  = 8;               // partial distances per array A (m)
  parameter int unsigned R_MAX  = 128;             // max beats per vector (4096 dims / 32)

  // Distance and index
  parameter int unsigned DIST_W = 48;
  parameter int unsigned IDX_W  = 32;

  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [IDX_W-1:0]  idx_t;

  // A (distance, index) pair
  typedef struct packed {
    dist_t dst; 
    idx_t  idx;
  } pair_t;

  // One item on the kNN queue pipeline
  typedef struct packed {
    logic  eos;   // end-of-stream marker (pair fields unused)
    logic  sol;   // pair is marked as a solution (member of the kNN set)
    logic  full;  // pair holds a dataset vector (0: empty slot, distance +inf)
    pair_t pair;
  } qitem_t;

  // Run-time configuration of the shared hardware
  typedef enum logic {
    MODE_FQSD = 1'b0,  // fixed queries, streamed dataset (throughput)
    MODE_FDSQ = 1'b1   // fixed dataset, streamed queries (latency)
  } mode_e;

  // Destinations of a host write
  typedef enum logic [1:0] {
    HW_QUERY  = 2'd0,  // query memory of one distance computation (or all)
    HW_BANK   = 2'd1,  // dataset memory bank, addressed directly (FD-SQ)
    HW_STREAM = 2'd2,  // next free double-buffer bank (FQ-SD)
    HW_NVEC   = 2'd3   // number of vectors held by a bank (FD-SQ)
  } hw_dest_e;

endpackage
