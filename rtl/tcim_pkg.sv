// tcim_pkg: types and constants shared by the triangle-counting processing-in-MRAM design.
//
// The slice width |S| = 64 bits is the value used for all of the paper's results. The mat
// command encoding (NOP, WRITE, READ, AND) is this design's own: the paper only says the sense
// amplifiers perform either a READ or an AND, and that the write driver stores operand rows.
package tcim_pkg;

  // Default slice size |S| in bits.
  localparam int unsigned SLICE_W_DEF = 64;

  // Command presented to a computational mat.
  //   MAT_WRITE : column driver writes wdata into row_a
  //   MAT_READ  : single-row activation of row_a, SA uses the READ reference
  //   MAT_AND   : rows row_a and row_b activated together, SA uses the AND reference
  typedef enum logic [1:0] {
    MAT_NOP   = 2'd0,
    MAT_WRITE = 2'd1,
    MAT_READ  = 2'd2,
    MAT_AND   = 2'd3
  } mat_cmd_e;

  // Operation requested from the LRU replacement unit.
  typedef enum logic {
    LRU_TOUCH = 1'b0,   // a resident slice was used again: make it most recently used
    LRU_ALLOC = 1'b1    // a slot is needed: free slot if any, else the least recently used one
  } lru_op_e;

endpackage
