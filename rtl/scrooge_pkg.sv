// scrooge_pkg: types and helpers shared by the Scrooge aligner core.
//
// Bases are carried in a two-bit code (A=0, C=1, G=2, T=3), the
// two-bit-per-base encoding the software versions of the algorithm use;
// the particular code assignment is this design's choice. Edit operations
// leave the traceback unit as op_t: M (match), S (substitution),
// D (deletion: a text base with no pattern base) and I (insertion: a
// pattern base with no text base).
package scrooge_pkg;

  typedef logic [1:0] base_t;

  localparam base_t BASE_A = 2'd0;
  localparam base_t BASE_C = 2'd1;
  localparam base_t BASE_G = 2'd2;
  localparam base_t BASE_T = 2'd3;

  typedef enum logic [1:0] {
    OP_M = 2'd0,
    OP_S = 2'd1,
    OP_D = 2'd2,
    OP_I = 2'd3
  } op_t;

endpackage
