// maple_accum: accumulate logic of one Maple MAC unit (PSB, adders and the C row).
//
// The partial sum buffer PSB is N registers, one per column j' of the output row. A product
// from the multiply logic is written into PSB[j'] (the demultiplexer of the paper's datapath);
// in the following cycle the adder of that column adds it into C[j'], so that C[i,j'] becomes
// the sum over k' of the partial sums C^k'[i,j']. All N adders work in parallel, which is what
// lets a row absorb one product per cycle even when consecutive products hit the same column.
// A bit per column (nz_o) records which columns received a partial sum: it is the sparsity
// pattern (col_id list) of the finished C row.
//
// The register organisation follows the paper. The handshake, the row-end flag and the output
// of the row as N values plus a non-zero mask are this design's choice.
//
// Timing: a product accepted at edge t lands in PSB at t, in C at t+1. A row end accepted at
// edge t makes out_valid_o rise at t+1 with the complete row in c_o. The row is held until
// out_ready_i; C, PSB and the mask are then cleared. in_ready_o is low from the row end until
// the row has left, so rows never mix (two idle cycles per row).
module maple_accum
  import maple_pkg::*;
#(
  parameter int N = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_fire_i,          // a product for column in_col_i
  input  logic in_end_i,           // the row is complete after this cycle's product (if any)
  input  idx_t in_col_i,
  input  acc_t in_prod_i,
  input  idx_t in_i_i,             // row index i of the row being closed
  output logic in_ready_o,
  output logic out_valid_o,
  input  logic out_ready_i,
  output idx_t out_i_o,
  output acc_t c_o [N],
  output logic [N-1:0] nz_o
);
  localparam int JW = (N > 1) ? $clog2(N) : 1;

  acc_t          psb   [N];
  logic [N-1:0]  psb_v;
  logic          end_q;
  logic          take;

  assign in_ready_o = !out_valid_o && !end_q;
  assign take       = in_ready_o;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      psb_v       <= '0;
      end_q       <= 1'b0;
      out_valid_o <= 1'b0;
      nz_o        <= '0;
      out_i_o     <= '0;
      for (int j = 0; j < N; j++) begin
        c_o[j] <= '0;
        psb[j] <= '0;
      end
    end else begin
      // adders: fold every pending partial sum into its C register
      for (int j = 0; j < N; j++) begin
        if (psb_v[j]) begin
          c_o[j]  <= c_o[j] + psb[j];
          nz_o[j] <= 1'b1;
        end
      end
      psb_v <= '0;
      if (end_q) begin
        out_valid_o <= 1'b1;
        end_q       <= 1'b0;
      end
      if (out_valid_o && out_ready_i) begin
        out_valid_o <= 1'b0;
        nz_o        <= '0;
        for (int j = 0; j < N; j++) c_o[j] <= '0;
      end
      // demultiplexer: the new partial sum goes to PSB[j']
      if (take && in_fire_i) begin
        psb[in_col_i[JW-1:0]]   <= in_prod_i;
        psb_v[in_col_i[JW-1:0]] <= 1'b1;
      end
      if (take && in_end_i) begin
        end_q   <= 1'b1;
        out_i_o <= in_i_i;
      end
    end
  end

  // A product must address an existing PSB register.
  a_col_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   (in_fire_i && take) |-> (in_col_i < idx_t'(N)));

endmodule
