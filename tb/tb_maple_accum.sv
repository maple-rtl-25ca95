// tb_maple_accum: self-checking test of the Maple accumulate logic (maple_accum), N = 4.
//
// Random rows of partial sums are sent in, one per cycle when in_ready allows, each with a
// destination column; the last one of a row carries the row-end flag, and some rows end with
// a bare row-end (empty rows). Rows often send several partial sums to the same column, also
// back to back. The finished rows are taken with random back-pressure and compared with sums
// and non-zero masks computed here. The test also checks the timing: the row appears two
// clock edges after its row-end was accepted, and in_ready stays low while a row is pending.
`timescale 1ns/1ps
module tb_maple_accum;
  import maple_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_fire_i, in_end_i, in_ready_o, out_valid_o, out_ready_i;
  idx_t in_col_i, in_i_i, out_i_o;
  acc_t in_prod_i;
  acc_t c_o [N];
  logic [N-1:0] nz_o;

  maple_accum dut (.*);

  typedef struct { logic fire, last; idx_t col; acc_t prod; idx_t i; } item_t;
  typedef struct { idx_t i; acc_t c [N]; logic [N-1:0] nz; } row_t;
  item_t iq [$];
  row_t  rq [$];
  int checks = 0, failures = 0, n_same_col = 0, n_hold = 0, n_empty = 0;
  longint cycle = 0, end_cycle = -1;
  logic   seen_valid = 0;

  task automatic add_row(int row);
    row_t r;
    int n = int'($urandom_range(0, 7));
    idx_t prev = '1;
    r.i = idx_t'(row);
    r.nz = '0;
    for (int j = 0; j < N; j++) r.c[j] = '0;
    for (int p = 0; p < n; p++) begin
      item_t it;
      it.fire = 1;
      it.col  = idx_t'($urandom_range(0, N - 1));
      it.prod = acc_t'($urandom);
      it.i    = idx_t'(row);
      it.last = (p == n - 1) && ($urandom_range(0, 3) != 0);
      if (it.col == prev) n_same_col++;
      prev = it.col;
      r.c[it.col[1:0]] += it.prod;
      r.nz[it.col[1:0]] = 1'b1;
      iq.push_back(it);
    end
    if (n == 0 || !iq[$].last) begin
      iq.push_back('{fire: 0, last: 1, col: '0, prod: '0, i: idx_t'(row)});
      if (n == 0) n_empty++;
    end
    rq.push_back(r);
  endtask

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if ((in_fire_i || in_end_i) && in_ready_o) begin
        void'(iq.pop_front());
        if (in_end_i) end_cycle = cycle;
      end
      if (end_cycle >= 0 && end_cycle < cycle && !out_valid_o) begin
        checks++;
        if (in_ready_o) begin failures++; $display("FAIL @%0t: in_ready high with a row pending", $time); end
      end
      if (out_valid_o && !seen_valid) begin
        checks++;
        if (cycle - end_cycle != 2) begin
          failures++;
          $display("FAIL @%0t: row out %0d edges after its end (expected 2)", $time, cycle - end_cycle);
        end
      end
      seen_valid = out_valid_o;
      if (out_valid_o && !out_ready_i) n_hold++;
      if (out_valid_o && out_ready_i) begin
        row_t r;
        r = rq.pop_front();
        end_cycle = -1;
        checks++;
        if (out_i_o != r.i || c_o != r.c || nz_o != r.nz) begin
          failures++;
          $display("FAIL @%0t: row %0d (exp %0d) nz %b (exp %b)", $time, out_i_o, r.i, nz_o, r.nz);
        end
      end
    end
  end

  always @(posedge clk) begin
    #1;
    if (iq.size() > 0 && $urandom_range(0, 5) != 0) begin
      in_fire_i = iq[0].fire; in_end_i = iq[0].last; in_col_i = iq[0].col;
      in_prod_i = iq[0].prod; in_i_i = iq[0].i;
    end else begin
      in_fire_i = 0; in_end_i = 0; in_col_i = '0; in_prod_i = '0; in_i_i = '0;
    end
    out_ready_i = ($urandom_range(0, 3) != 0);
  end

  initial begin
    in_fire_i = 0; in_end_i = 0; in_col_i = '0; in_prod_i = '0; in_i_i = '0; out_ready_i = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) add_row(r);
    wait (rq.size() == 0);
    @(posedge clk);
    checks++;
    if (n_same_col == 0 || n_hold == 0 || n_empty == 0) begin
      failures++;
      $display("FAIL: coverage same-column %0d held %0d empty %0d", n_same_col, n_hold, n_empty);
    end
    $display("back-to-back same column %0d, held cycles %0d, empty rows %0d", n_same_col, n_hold, n_empty);
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
