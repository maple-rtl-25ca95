// tb_maple_ctrl: self-checking test of the Maple control logic (maple_ctrl).
//
// The test plays both buffers itself: it keeps queues of ARB and BRB entries for random CSR
// rows (empty A rows, empty B rows and rows of up to five non-zeros, with row pointers at
// random offsets), shows their heads with random gaps and holds acc_ready low at random. From
// the same rows it derives the exact sequence of actions the control logic must take (fire,
// ARB pop, BRB pop, row end) and compares every action the block takes with it, which also
// checks that the number of multiplications per A non-zero equals the row-pointer
// difference of its B row. No action may happen while acc_ready is low. At the end one
// mismatching BRB row index must raise the sticky err flag.
`timescale 1ns/1ps
module tb_maple_ctrl;
  import maple_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       arb_valid_i, brb_valid_i, acc_ready_i;
  arb_entry_t arb_head_i;
  brb_entry_t brb_head_i;
  logic       arb_pop_o, brb_pop_o, fire_o, end_o, err_o;

  maple_ctrl dut (.*);

  typedef struct packed { logic fire, arb_pop, brb_pop, row_end; } act_t;
  arb_entry_t aq [$];
  brb_entry_t bq [$];
  act_t       eq [$];
  int checks = 0, failures = 0, n_fire = 0, n_rows = 0, n_empty_a = 0, n_empty_b = 0;

  task automatic add_row(int row, int nnz_a, bit bad);
    ptr_t rpa = ptr_t'($urandom_range(0, 1000));
    if (nnz_a == 0) begin
      aq.push_back('{rp: rpa, rp_next: rpa, i: idx_t'(row), col_id: '0, value: '0});
      eq.push_back('{fire: 0, arb_pop: 1, brb_pop: 0, row_end: 1});
      return;
    end
    for (int p = 0; p < nnz_a; p++) begin
      int   k     = int'($urandom_range(0, 500));
      int   nnz_b = int'($urandom_range(0, 5));
      ptr_t rpb   = ptr_t'($urandom_range(0, 100000));
      aq.push_back('{rp: rpa, rp_next: rpa + ptr_t'(nnz_a), i: idx_t'(row), col_id: idx_t'(k),
                     value: data_t'($urandom)});
      if (nnz_b == 0) begin
        bq.push_back('{rp: rpb, rp_next: rpb, i_brb: idx_t'(bad ? k + 1 : k), col_id: '0, value: '0});
        eq.push_back('{fire: 0, arb_pop: 1, brb_pop: 1, row_end: (p == nnz_a - 1)});
      end
      for (int q = 0; q < nnz_b; q++) begin
        bq.push_back('{rp: rpb, rp_next: rpb + ptr_t'(nnz_b), i_brb: idx_t'(bad ? k + 1 : k),
                       col_id: idx_t'($urandom_range(0, 3)), value: data_t'($urandom)});
        eq.push_back('{fire: 1, arb_pop: (q == nnz_b - 1), brb_pop: 1,
                       row_end: (q == nnz_b - 1) && (p == nnz_a - 1)});
      end
    end
  endtask

  // compare each action with the expected sequence
  always @(posedge clk) if (rst_n) begin
    act_t got;
    got = '{fire: fire_o, arb_pop: arb_pop_o, brb_pop: brb_pop_o, row_end: end_o};
    if (got != '0) begin
      checks++;
      if (!acc_ready_i || !arb_valid_i) begin
        failures++;
        $display("FAIL @%0t: action without acc_ready/ARB data", $time);
      end else if (eq.size() == 0 || got != eq[0]) begin
        failures++;
        $display("FAIL @%0t: action %b expected %b", $time, got, (eq.size() > 0) ? eq[0] : act_t'('0));
      end else void'(eq.pop_front());
      if (fire_o) n_fire++;
      if (end_o) n_rows++;
      if (end_o && !fire_o && !brb_pop_o) n_empty_a++;
      if (brb_pop_o && !fire_o) n_empty_b++;
      if (arb_pop_o && arb_valid_i) void'(aq.pop_front());
      if (brb_pop_o && brb_valid_i) void'(bq.pop_front());
    end
  end

  always @(posedge clk) begin
    #1;
    arb_valid_i = (aq.size() > 0) && ($urandom_range(0, 5) != 0);
    arb_head_i  = (aq.size() > 0) ? aq[0] : '0;
    brb_valid_i = (bq.size() > 0) && ($urandom_range(0, 5) != 0);
    brb_head_i  = (bq.size() > 0) ? bq[0] : '0;
    acc_ready_i = ($urandom_range(0, 4) != 0);
  end

  initial begin
    arb_valid_i = 0; brb_valid_i = 0; acc_ready_i = 0; arb_head_i = '0; brb_head_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) add_row(r, int'($urandom_range(0, 5)), 0);
    wait (eq.size() == 0);
    @(posedge clk);
    checks++;
    if (err_o) begin failures++; $display("FAIL: err raised on consistent rows"); end
    add_row(999, 2, 1);
    wait (eq.size() == 0);
    @(posedge clk);
    checks++;
    if (!err_o) begin failures++; $display("FAIL: err not raised on a BRB row mismatch"); end
    checks++;
    if (n_empty_a == 0 || n_empty_b == 0 || n_rows != 201) begin
      failures++;
      $display("FAIL: coverage rows %0d empty A %0d empty B %0d", n_rows, n_empty_a, n_empty_b);
    end
    $display("rows %0d products %0d empty A rows %0d empty B rows %0d", n_rows, n_fire, n_empty_a, n_empty_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
