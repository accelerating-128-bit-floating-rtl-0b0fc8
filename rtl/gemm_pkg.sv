// gemm_pkg: types shared by the blocks of the binary128 GEMM systolic array.
//
// a_elem_t is what one PE row receives from its Feed A stage and passes on to
// the right: one binary128 value of A plus the control tags of the step. The
// tags mark the first (k == 0) and the last (k == K-1) term of the dot products
// and say which of the PE's M_TILE accumulators (t) the term belongs to.
// b_elem_t is what one PE column receives from its Feed B stage and passes down.
// The tags riding with A, and the index t, are this design's own choice.
package gemm_pkg;
  import fp128_pkg::*;

  localparam int unsigned T_W = 16;   // width of the accumulator index tag

  typedef struct packed {
    logic           valid;
    logic           first;   // k == 0: start a new dot product
    logic           last;    // k == K-1: the dot product is complete after this term
    logic [T_W-1:0] t;       // accumulator index inside the PE
    fp128_t         a;
  } a_elem_t;

  typedef struct packed {
    logic   valid;
    fp128_t b;
  } b_elem_t;

  // Run-time description of one product C' = A B (m x k times k x n), in
  // 128-bit words. A(r,p) is at a_base + p*lda + r, B(p,c) at b_base + p*ldb + c
  // and C(r,c) at c_base + c*ldc + r. The host lays the operands out this way
  // (it also handles transposes, alpha and beta).
  typedef struct packed {
    logic [31:0] m;
    logic [31:0] n;
    logic [31:0] k;
    logic [31:0] lda;
    logic [31:0] ldb;
    logic [31:0] ldc;
    logic [31:0] a_base;
    logic [31:0] b_base;
    logic [31:0] c_base;
  } gemm_cfg_t;

endpackage
