// slbiu_pkg: constants and types shared by the Sparse Linear Branch Inference
// Unit (SLBIU) and the branch prediction unit around it.
//
// The default sizes are the 2 KB, 8-bit (Q3.4) configuration with 512-bit
// global and 512-bit local histories: n = 13 offloaded branches, each with at
// most nnz = 36 non-zero weights. The branch PC width (64 bits) is this
// design's choice; the source gives no value for it.
//
// Hint loading is done one field group at a time through a small command
// port (header, weight/index pair, invalidate all); the command encoding is
// this design's own.
package slbiu_pkg;

  parameter int unsigned SLBIU_LH  = 512;  // local history length (bits)
  parameter int unsigned SLBIU_GH  = 512;  // global history length (bits)
  parameter int unsigned SLBIU_N   = 13;   // number of offloaded branches
  parameter int unsigned SLBIU_NNZ = 36;   // maximum non-zero weights per hint
  parameter int unsigned SLBIU_Q   = 8;    // weight / intercept width
  parameter int unsigned SLBIU_P   = 64;   // branch PC width

  // Hint load commands.
  typedef enum logic [1:0] {
    LD_NOP      = 2'd0,  // nothing
    LD_HEADER   = 2'd1,  // write PC and intercept of one entry, mark it valid,
                         // clear its LHR and all its weight/index pairs
    LD_PAIR     = 2'd2,  // write one (weight, history index) pair of one entry
    LD_INVAL_ALL = 2'd3  // invalidate every entry (context switch / new phase)
  } load_op_e;

  // Storage bits of one configuration, Eq. (2) of the source:
  // n * (p + q + nnz*q + nnz*ceil(log2(lh+gh)) + lh).
  function automatic int unsigned storage_bits(int unsigned n, int unsigned p,
                                               int unsigned q, int unsigned nnz,
                                               int unsigned lh, int unsigned gh);
    return n * (p + q + nnz * q + nnz * $clog2(lh + gh) + lh);
  endfunction

endpackage
