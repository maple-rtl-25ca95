// tb_maple_multiply: self-checking test of the Maple multiply logic (maple_multiply).
//
// Random ARB and BRB entries, with full-range signed 16-bit values, are written through the
// two valid/ready ports and popped at random, against two queue models. Whenever both heads
// are present the test checks the heads, the destination column (B.col_id) and the product,
// which must be the exact 32-bit signed product of A.value and B.value.
`timescale 1ns/1ps
module tb_maple_multiply;
  import maple_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       arb_in_valid, arb_in_ready, brb_in_valid, brb_in_ready;
  arb_entry_t arb_in_data, arb_head_o;
  brb_entry_t brb_in_data, brb_head_o;
  logic       arb_valid_o, brb_valid_o, arb_pop_i, brb_pop_i;
  acc_t       prod_o;
  idx_t       col_o;

  maple_multiply dut (.*);

  arb_entry_t aq [$];
  brb_entry_t bq [$];
  int checks = 0, failures = 0, n_neg = 0;

  always @(posedge clk) if (rst_n) begin
    if (aq.size() > 0 && bq.size() > 0) begin
      longint exp_p;
      exp_p = longint'(aq[0].value) * longint'(bq[0].value);
      checks++;
      if (!arb_valid_o || !brb_valid_o || arb_head_o != aq[0] || brb_head_o != bq[0] ||
          col_o != bq[0].col_id || longint'(prod_o) != exp_p) begin
        failures++;
        $display("FAIL @%0t: %0d x %0d = %0d, got %0d", $time, aq[0].value, bq[0].value, exp_p, prod_o);
      end
      if (exp_p < 0) n_neg++;
    end
    if (arb_pop_i && arb_valid_o) void'(aq.pop_front());
    if (brb_pop_i && brb_valid_o) void'(bq.pop_front());
    if (arb_in_valid && arb_in_ready) aq.push_back(arb_in_data);
    if (brb_in_valid && brb_in_ready) bq.push_back(brb_in_data);
  end

  always @(posedge clk) begin
    #1;
    arb_in_valid = rst_n && ($urandom_range(0, 3) != 0);
    arb_in_data  = arb_entry_t'({$urandom(), $urandom(), $urandom(), $urandom()});
    brb_in_valid = rst_n && ($urandom_range(0, 3) != 0);
    brb_in_data  = brb_entry_t'({$urandom(), $urandom(), $urandom(), $urandom()});
    arb_pop_i    = arb_valid_o && ($urandom_range(0, 2) != 0);
    brb_pop_i    = brb_valid_o && ($urandom_range(0, 2) != 0);
  end

  initial begin
    arb_in_valid = 0; brb_in_valid = 0; arb_pop_i = 0; brb_pop_i = 0;
    arb_in_data = '0; brb_in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    checks++;
    if (n_neg == 0) begin failures++; $display("FAIL: no negative product seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
