// sparch_pkg: types and constants shared by the SpArch sparse matrix-matrix
// multiply (SpGEMM) datapath.
//
// A nonzero travels through the design as a COO element: 32-bit row index,
// 32-bit column index and a 64-bit IEEE-754 double value. Elements are ordered
// by the 64-bit key {row, col} (row first, then column), which is the order the
// merge tree keeps. The index and value widths follow the paper's setup (64-bit
// index split 32/32, 64-bit value). The `valid` bit that travels with an
// element in the merger is this design's choice: the paper marks eliminated
// elements as "zero", which would be ambiguous for a real value of 0.0.
//
// Memory is abstracted as word-addressed 128-bit words (one COO element per
// word, or one index in the low 32 bits). The paper's HBM has 16 x 64-bit
// channels; the word interface here is this design's own simplification.
package sparch_pkg;

  localparam int unsigned IDX_W  = 32;
  localparam int unsigned VAL_W  = 64;
  localparam int unsigned KEY_W  = 2 * IDX_W;
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned WORD_W = 128;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [VAL_W-1:0] val_t;
  typedef logic [KEY_W-1:0] key_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [WORD_W-1:0] word_t;

  // COO element; packed so that {row, col} compares as the sort key.
  typedef struct packed {
    idx_t row;
    idx_t col;
    val_t val;
  } elem_t;

  // Element with a valid flag, as it moves through merger lanes.
  typedef struct packed {
    logic  v;
    elem_t e;
  } lane_t;

  // Element of the left matrix A as delivered by the column fetcher: its row,
  // its original column (which selects the row of B) and its condensed column
  // (which selects the merge tree port).
  typedef struct packed {
    idx_t row;
    idx_t col;
    idx_t ccol;
    val_t val;
  } a_elem_t;

  // Key of an element, the sort order of the merger.
  function automatic key_t key_of(elem_t e);
    return {e.row, e.col};
  endfunction


endpackage
