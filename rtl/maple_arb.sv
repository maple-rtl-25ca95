// maple_arb: ARB, the matrix-A row buffer of one Maple MAC unit.
//
// A first-in first-out buffer of arb_entry_t entries holding the non-zeros of the rows of A, in CSR order, one row i after another.
// The paper describes the buffer as a FIFO and gives the fields of an entry; the depth
// (default 4) and the handshake are this design's choice.
//
// Interface: a valid/ready write port (in_valid, in_ready, in_data; an entry is written on a
// clock edge where both are 1) and a read port where out_valid says the head entry out_data is
// present and pop (asserted only while out_valid) removes it at the clock edge. The head is
// visible combinationally from the storage array, so an entry written at one edge can be read
// in the next cycle. Reset (rst_n low, synchronous) empties the buffer.
module maple_arb
  import maple_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // write side (from the loader)
  input  logic       in_valid,
  output logic       in_ready,
  input  arb_entry_t in_data,
  // read side (to the multiplier and control logic)
  output logic       out_valid,
  output arb_entry_t out_data,
  input  logic       pop
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  arb_entry_t mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0] count;
  logic          push, do_pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign do_pop    = pop && out_valid;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop) rd_ptr <= next_ptr(rd_ptr);
      count <= count + CW'(push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rule: the reader pops only an entry that is there.
  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);

endmodule
