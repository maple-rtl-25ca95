// maple_multiply: multiply logic of one Maple MAC unit (ARB, BRB and the multiplier).
//
// Holds the A row buffer and the B rows buffer and multiplies their head values, giving the
// partial sum C^k'.value[i][j'] = A.value[i][k'] x B.value[k'][j'] together with its
// destination column j' (= B.col_id of the B head). The structure (two FIFOs feeding one
// multiplier) follows the paper; the full-precision signed product and the valid/ready write
// ports are this design's choice.
//
// Interface: valid/ready write ports for ARB and BRB; the buffer heads go out to the control
// logic, which returns the pops. prod_o and col_o are combinational from the heads and are
// meaningful in a cycle where the control logic fires.
module maple_multiply
  import maple_pkg::*;
#(
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
  output logic       arb_valid_o,
  output arb_entry_t arb_head_o,
  output logic       brb_valid_o,
  output brb_entry_t brb_head_o,
  input  logic       arb_pop_i,
  input  logic       brb_pop_i,
  output acc_t       prod_o,
  output idx_t       col_o
);
  maple_arb #(.DEPTH(ARB_DEPTH)) u_arb (
    .clk, .rst_n,
    .in_valid(arb_in_valid), .in_ready(arb_in_ready), .in_data(arb_in_data),
    .out_valid(arb_valid_o), .out_data(arb_head_o), .pop(arb_pop_i)
  );

  maple_brb #(.DEPTH(BRB_DEPTH)) u_brb (
    .clk, .rst_n,
    .in_valid(brb_in_valid), .in_ready(brb_in_ready), .in_data(brb_in_data),
    .out_valid(brb_valid_o), .out_data(brb_head_o), .pop(brb_pop_i)
  );

  assign prod_o = acc_t'(arb_head_o.value) * acc_t'(brb_head_o.value);
  assign col_o  = brb_head_o.col_id;

endmodule
