// mercury_pkg: types and constants shared by the similarity-reuse accelerator.
//
// The Hitmap state of an input vector is one of three outcomes of offering its
// signature to the MCache (after the flow chart of the MCache update):
//   HIT - the signature was already in the cache; the stored result is reused.
//   MAU - "miss and update": the tag was inserted, the result must be computed
//         and written into the data portion of that line.
//   MNU - "miss no update": the set was full, the result is computed and dropped.
// The encoding (MNU = 0 so a cleared Hitmap means "compute everything") and
// all data widths are this design's own choices; the paper gives neither.
package mercury_pkg;

  typedef enum logic [1:0] {
    HM_MNU = 2'd0,
    HM_MAU = 2'd1,
    HM_HIT = 2'd2
  } hit_e;

  // Operation the PE sets are running.
  typedef enum logic [0:0] {
    MODE_SIG  = 1'b0,   // random filter R_j: produce signature bit j
    MODE_CONV = 1'b1    // real filter: dot products with reuse
  } set_mode_e;

endpackage
