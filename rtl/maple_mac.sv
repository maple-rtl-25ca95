// maple_mac: one MAC unit of the Maple PE; it computes whole rows of C = A x B.
//
// A MAC takes the non-zeros of one row i of A (into its ARB) and, for every one of them, the
// non-zeros of the matching row k' of B (into its BRB, in the same order). The control logic
// pairs each A non-zero with the elements of its B row, the multiplier forms the partial sums
// C^k'[i,j'] one per cycle, and the accumulate logic sums them per column j' in the partial
// sum buffer and the C row register. When the last A non-zero of the row has been used, the
// finished row C[i,:] is offered on the output port. Rows follow one another back to back;
// the next row's entries may already wait in the buffers.
//
// Structure (multiply logic, accumulate logic, control logic) follows the paper; buffer depths
// and handshakes are this design's choice.
//
// Timing: one product per cycle while both buffers have data. A row with P products (an empty
// B row counts as one) shows out_valid two cycles after its last product; an empty A row
// takes one cycle plus the same two. Back-pressure on out_ready stops the unit.
module maple_mac
  import maple_pkg::*;
#(
  parameter int N         = 4,
  parameter int ARB_DEPTH = 4,
  parameter int BRB_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       arb_in_valid,
  output logic       arb_in_ready,
  input  arb_entry_t arb_in_data,
  input  logic       brb_in_valid,
  output logic       brb_in_ready,
  input  brb_entry_t brb_in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output idx_t       out_i,
  output acc_t       out_c [N],
  output logic [N-1:0] out_nz,
  output logic       err
);
  logic       arb_valid, brb_valid, arb_pop, brb_pop, fire, row_end, acc_ready;
  arb_entry_t arb_head;
  brb_entry_t brb_head;
  acc_t       prod;
  idx_t       col;

  maple_multiply #(.ARB_DEPTH(ARB_DEPTH), .BRB_DEPTH(BRB_DEPTH)) u_mul (
    .clk, .rst_n,
    .arb_in_valid, .arb_in_ready, .arb_in_data,
    .brb_in_valid, .brb_in_ready, .brb_in_data,
    .arb_valid_o(arb_valid), .arb_head_o(arb_head),
    .brb_valid_o(brb_valid), .brb_head_o(brb_head),
    .arb_pop_i(arb_pop), .brb_pop_i(brb_pop),
    .prod_o(prod), .col_o(col)
  );

  maple_ctrl u_ctrl (
    .clk, .rst_n,
    .arb_valid_i(arb_valid), .arb_head_i(arb_head),
    .brb_valid_i(brb_valid), .brb_head_i(brb_head),
    .acc_ready_i(acc_ready),
    .arb_pop_o(arb_pop), .brb_pop_o(brb_pop),
    .fire_o(fire), .end_o(row_end), .err_o(err)
  );

  maple_accum #(.N(N)) u_acc (
    .clk, .rst_n,
    .in_fire_i(fire), .in_end_i(row_end), .in_col_i(col), .in_prod_i(prod),
    .in_i_i(arb_head.i), .in_ready_o(acc_ready),
    .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_i_o(out_i), .c_o(out_c), .nz_o(out_nz)
  );

endmodule
