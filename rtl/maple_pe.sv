// maple_pe: the Maple processing element, NUM_MAC MAC units side by side.
//
// Maple (multiply and accumulate in parallel) is a processing element for sparse x sparse
// matrix multiplication by Gustavson's row-wise product, working directly on CSR data. It
// holds NUM_MAC independent MAC units; each computes complete rows of C from the non-zeros of
// a row of A and the rows of B those non-zeros select, and keeps all partial sums of that row
// inside the PE until the row is final. The default of four MAC units, each with a four-entry
// partial sum buffer, is the paper's worked example for 4x4 matrices. The paper's
// accelerator configurations use two MACs per PE (4 PEs, Matraptor-style) and sixteen MACs
// per PE (8 PEs, Extensor-style); NUM_MAC and N are parameters for that reason.
//
// Interface: per MAC unit m, a valid/ready ARB write port, a valid/ready BRB write port and a
// valid/ready row output (row index, N values, non-zero mask), plus a sticky error flag. How
// rows of A are shared among the MAC units and where the CSR data comes from (a loader, a
// crossbar or network to memory) belongs to the surrounding accelerator and is left to the
// driver of these ports. Timing is that of maple_mac, independently for each unit.
module maple_pe
  import maple_pkg::*;
#(
  parameter int NUM_MAC   = 4,
  parameter int N         = 4,
  parameter int ARB_DEPTH = 4,
  parameter int BRB_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_MAC-1:0]  arb_in_valid,
  output logic [NUM_MAC-1:0]  arb_in_ready,
  input  arb_entry_t          arb_in_data [NUM_MAC],
  input  logic [NUM_MAC-1:0]  brb_in_valid,
  output logic [NUM_MAC-1:0]  brb_in_ready,
  input  brb_entry_t          brb_in_data [NUM_MAC],
  output logic [NUM_MAC-1:0]  out_valid,
  input  logic [NUM_MAC-1:0]  out_ready,
  output idx_t                out_i  [NUM_MAC],
  output acc_t                out_c  [NUM_MAC][N],
  output logic [N-1:0]        out_nz [NUM_MAC],
  output logic [NUM_MAC-1:0]  err
);
  for (genvar m = 0; m < NUM_MAC; m++) begin : g_mac
    maple_mac #(.N(N), .ARB_DEPTH(ARB_DEPTH), .BRB_DEPTH(BRB_DEPTH)) u_mac (
      .clk, .rst_n,
      .arb_in_valid(arb_in_valid[m]), .arb_in_ready(arb_in_ready[m]), .arb_in_data(arb_in_data[m]),
      .brb_in_valid(brb_in_valid[m]), .brb_in_ready(brb_in_ready[m]), .brb_in_data(brb_in_data[m]),
      .out_valid(out_valid[m]), .out_ready(out_ready[m]),
      .out_i(out_i[m]), .out_c(out_c[m]), .out_nz(out_nz[m]), .err(err[m])
    );
  end

endmodule
