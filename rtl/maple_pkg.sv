// maple_pkg: shared widths and buffer-entry types of the Maple processing element.
//
// The Maple PE multiplies sparse matrices held in compressed sparse row (CSR) form with
// Gustavson's row-wise product. Every number that travels through the PE is one of the types
// below. The entry layouts follow the buffer organisation of the PE: an A-row-buffer (ARB)
// entry carries A.value, A.col_id, the row index i and the row pointer of row i; a
// B-rows-buffer (BRB) entry carries B.value, B.col_id (= j'), the row pointer of its B row and
// the index of that B row (i_BRB). The field widths are this design's own choice: the paper
// gives no word widths. A row pointer is kept as the pair row_ptr[r], row_ptr[r+1] so the
// control logic can take their difference (the number of non-zeros of the row) without
// looking at a neighbouring entry. An entry whose two pointers are equal marks an empty row
// and carries no value.
package maple_pkg;

  // Value width of A and B elements (signed integers) and of products/partial sums.
  localparam int DATA_W = 16;
  localparam int ACC_W  = 2 * DATA_W;
  // Width of a row or column index and of a CSR row pointer. 24-bit pointers cover the
  // largest matrix the paper evaluates (5.1M non-zeros); 20-bit indices cover 916K rows.
  localparam int IDX_W  = 20;
  localparam int PTR_W  = 24;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [IDX_W-1:0]  idx_t;
  typedef logic        [PTR_W-1:0]  ptr_t;

  // One non-zero of row i of A (or the marker of an empty row when rp == rp_next).
  typedef struct packed {
    ptr_t  rp;        // row_ptr_A[i]
    ptr_t  rp_next;   // row_ptr_A[i+1]
    idx_t  i;         // row index of A (= row index of the C row produced)
    idx_t  col_id;    // A.col_id = k', selects row k' of B
    data_t value;     // A.value[i][k']
  } arb_entry_t;

  // One non-zero of row k' of B (or the marker of an empty B row when rp == rp_next).
  typedef struct packed {
    ptr_t  rp;        // row_ptr_B[k']      (row_ptr_j' in the buffer layout)
    ptr_t  rp_next;   // row_ptr_B[k'+1]
    idx_t  i_brb;     // index k' of the B row this element belongs to
    idx_t  col_id;    // B.col_id = j', the PSB register the product goes to
    data_t value;     // B.value[k'][j']
  } brb_entry_t;

endpackage
