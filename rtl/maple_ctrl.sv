// maple_ctrl: control logic of one Maple MAC unit.
//
// The control logic decides, every cycle, whether the multiplier fires and which buffer
// entries are used up. As in the paper, it counts multiplications with the CSR row pointers:
// row_ptr[r+1] - row_ptr[r] is the number of non-zeros of row r. For the A non-zero at the
// head of the ARB (column k') it lets the multiplier consume one BRB entry per cycle until
// nnz(B row k') products are done, then pops the A non-zero; after nnz(A row i) A non-zeros
// the row is finished and end_o asks the accumulate logic to deliver C[i,:].
//
// Empty rows are this design's choice of encoding (the paper does not discuss them): an ARB
// entry with rp == rp_next stands for an empty A row and ends the row at once (C[i,:] = 0); a
// BRB entry with rp == rp_next stands for an empty B row k' and retires its A non-zero
// without a product. A BRB entry whose B row index (i_BRB) is not the A non-zero's column
// sets the sticky err_o flag; the product is still computed.
//
// Timing: purely a decision on the current heads plus two counters; fire_o, pops and end_o
// are combinational and act at the next clock edge. One product per cycle at most. Nothing
// advances while acc_ready_i is low.
//
// Only the row pointers and index fields of the two heads are read here; their values go
// straight to the multiplier, so a linter reports those head bits as unused.
module maple_ctrl
  import maple_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // heads of the two buffers
  input  logic       arb_valid_i,
  input  arb_entry_t arb_head_i,
  input  logic       brb_valid_i,
  input  brb_entry_t brb_head_i,
  // accumulate logic can take a product / a row end this cycle
  input  logic       acc_ready_i,
  // decisions
  output logic       arb_pop_o,
  output logic       brb_pop_o,
  output logic       fire_o,      // product of the two heads is valid
  output logic       end_o,       // this cycle closes row i of C
  output logic       err_o        // sticky: BRB row index did not match A.col_id
);
  ptr_t nnz_a, nnz_b;
  ptr_t a_cnt, b_cnt;      // A non-zeros retired in this row, products done for this A non-zero
  logic a_done, b_done, go, mismatch;

  assign nnz_a = arb_head_i.rp_next - arb_head_i.rp;
  assign nnz_b = brb_head_i.rp_next - brb_head_i.rp;

  always_comb begin
    arb_pop_o = 1'b0;
    brb_pop_o = 1'b0;
    fire_o    = 1'b0;
    end_o     = 1'b0;
    a_done    = 1'b0;
    b_done    = 1'b0;
    go        = 1'b0;
    if (arb_valid_i && acc_ready_i) begin
      if (nnz_a == '0) begin
        // empty A row: C[i,:] is all zero
        arb_pop_o = 1'b1;
        end_o     = 1'b1;
      end else if (brb_valid_i) begin
        go        = 1'b1;
        brb_pop_o = 1'b1;
        fire_o    = (nnz_b != '0);
        b_done    = (nnz_b == '0) || (b_cnt == nnz_b - 1'b1);
        a_done    = b_done;
        arb_pop_o = b_done;
        end_o     = b_done && (a_cnt == nnz_a - 1'b1);
      end
    end
  end

  assign mismatch = go && (brb_head_i.i_brb != arb_head_i.col_id);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_cnt <= '0;
      b_cnt <= '0;
      err_o <= 1'b0;
    end else begin
      if (go) b_cnt <= b_done ? '0 : b_cnt + 1'b1;
      if (end_o)       a_cnt <= '0;
      else if (a_done) a_cnt <= a_cnt + 1'b1;
      if (mismatch) err_o <= 1'b1;
    end
  end

endmodule
