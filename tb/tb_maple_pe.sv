// tb_maple_pe: end-to-end test of the Maple PE at its default size (four MAC units, four
// partial sum registers each).
//
// The test builds sparse matrices in CSR form, hands the rows of A to the MAC units in turn
// (row r to unit r mod NUM_MAC), streams each unit's ARB entries and the matching B-row
// entries with random gaps, takes the finished C rows with random back-pressure, and compares
// every row (index, N values, non-zero mask) with a dense product computed here. Matrices:
// the two worked 4x4 examples of the Maple datapath description, random square products
// C = A x A (the evaluation style of the paper) and random rectangular A x B with empty rows.
// It counts, and requires at least once each: accumulation of two or more partial sums in
// one column, an empty A row, an empty B row, a full BRB stalling the loader, a held output
// row, and two or more MAC units multiplying in the same cycle. The err flags must stay low.
`timescale 1ns/1ps
module tb_maple_pe;
  import maple_pkg::*;

  localparam int NUM_MAC = 4;
  localparam int N       = 4;
  localparam int MAXD    = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NUM_MAC-1:0] arb_in_valid, arb_in_ready, brb_in_valid, brb_in_ready;
  logic [NUM_MAC-1:0] out_valid, out_ready, err;
  arb_entry_t arb_in_data [NUM_MAC];
  brb_entry_t brb_in_data [NUM_MAC];
  idx_t       out_i  [NUM_MAC];
  acc_t       out_c  [NUM_MAC][N];
  logic [N-1:0] out_nz [NUM_MAC];

  maple_pe dut (.*);

  int checks = 0, failures = 0;
  int cnt_multi_acc = 0, cnt_empty_a = 0, cnt_empty_b = 0, cnt_brb_full = 0;
  int cnt_out_hold = 0, cnt_parallel = 0, cnt_rows = 0;

  // stimulus and expectations, per MAC unit
  arb_entry_t arb_q [NUM_MAC][$];
  brb_entry_t brb_q [NUM_MAC][$];
  typedef struct { idx_t i; acc_t c [N]; logic [N-1:0] nz; } row_t;
  row_t exp_q [NUM_MAC][$];
  int next_mac = 0;
  int n_brb_entries = 0;   // multiplier cycles a single MAC would need

  // dense matrices
  int A [MAXD][MAXD];
  int B [MAXD][MAXD];

  // Turn dense A (m x k) and B (k x N) into CSR streams and expected rows.
  task automatic load_product(int m, int k);
    int rpa [MAXD+1], rpb [MAXD+1];
    int ca [$], cb [$];
    int va [$], vb [$];
    rpa[0] = 0;
    for (int r = 0; r < m; r++) begin
      for (int c = 0; c < k; c++) if (A[r][c] != 0) begin ca.push_back(c); va.push_back(A[r][c]); end
      rpa[r+1] = ca.size();
    end
    rpb[0] = 0;
    for (int r = 0; r < k; r++) begin
      for (int c = 0; c < N; c++) if (B[r][c] != 0) begin cb.push_back(c); vb.push_back(B[r][c]); end
      rpb[r+1] = cb.size();
    end
    for (int r = 0; r < m; r++) begin
      int u = next_mac;
      row_t e;
      int hits [N];
      next_mac = (next_mac + 1) % NUM_MAC;
      e.i = idx_t'(r);
      e.nz = '0;
      for (int j = 0; j < N; j++) begin
        e.c[j] = '0;
        hits[j] = 0;
        for (int kk = 0; kk < k; kk++)
          if (A[r][kk] != 0 && B[kk][j] != 0) begin
            e.c[j] += acc_t'(A[r][kk] * B[kk][j]);
            e.nz[j] = 1'b1;
            hits[j]++;
          end
        if (hits[j] >= 2) cnt_multi_acc++;
      end
      exp_q[u].push_back(e);
      if (rpa[r+1] == rpa[r]) begin
        arb_q[u].push_back('{rp: ptr_t'(rpa[r]), rp_next: ptr_t'(rpa[r+1]), i: idx_t'(r),
                             col_id: '0, value: '0});
        cnt_empty_a++;
      end
      for (int p = rpa[r]; p < rpa[r+1]; p++) begin
        int kp = ca[p];
        arb_q[u].push_back('{rp: ptr_t'(rpa[r]), rp_next: ptr_t'(rpa[r+1]), i: idx_t'(r),
                             col_id: idx_t'(kp), value: data_t'(va[p])});
        if (rpb[kp+1] == rpb[kp]) begin
          brb_q[u].push_back('{rp: ptr_t'(rpb[kp]), rp_next: ptr_t'(rpb[kp+1]), i_brb: idx_t'(kp),
                               col_id: '0, value: '0});
          cnt_empty_b++;
        end
        n_brb_entries += (rpb[kp+1] == rpb[kp]) ? 1 : rpb[kp+1] - rpb[kp];
        for (int q = rpb[kp]; q < rpb[kp+1]; q++)
          brb_q[u].push_back('{rp: ptr_t'(rpb[kp]), rp_next: ptr_t'(rpb[kp+1]), i_brb: idx_t'(kp),
                               col_id: idx_t'(cb[q]), value: data_t'(vb[q])});
      end
    end
  endtask

  function automatic int rnd_val();
    int v;
    v = int'($urandom_range(1, 99));
    return ($urandom_range(0, 1) != 0) ? -v : v;
  endfunction

  task automatic clear_ab();
    for (int r = 0; r < MAXD; r++) for (int c = 0; c < MAXD; c++) begin A[r][c] = 0; B[r][c] = 0; end
  endtask

  // loaders and output sink
  always @(posedge clk) begin
    if (rst_n) begin
      for (int u = 0; u < NUM_MAC; u++) begin
        if (arb_in_valid[u] && arb_in_ready[u]) void'(arb_q[u].pop_front());
        if (brb_in_valid[u] && brb_in_ready[u]) void'(brb_q[u].pop_front());
        if (brb_in_valid[u] && !brb_in_ready[u]) cnt_brb_full++;
        if (out_valid[u] && !out_ready[u]) cnt_out_hold++;
        if (out_valid[u] && out_ready[u]) begin
          row_t e;
          checks++;
          cnt_rows++;
          if (exp_q[u].size() == 0) begin
            failures++;
            $display("FAIL: MAC %0d produced an unexpected row %0d", u, out_i[u]);
          end else begin
            e = exp_q[u].pop_front();
            if (out_i[u] != e.i || out_nz[u] != e.nz || out_c[u] != e.c) begin
              failures++;
              $display("FAIL: MAC %0d row %0d (exp %0d) nz %b (exp %b) c0..3 %0d %0d %0d %0d (exp %0d %0d %0d %0d)",
                       u, out_i[u], e.i, out_nz[u], e.nz, out_c[u][0], out_c[u][1], out_c[u][2],
                       out_c[u][3], e.c[0], e.c[1], e.c[2], e.c[3]);
            end
          end
        end
      end
    end
  end

  // Next-cycle drive values, computed after this edge's pops.
  always @(posedge clk) begin
    #1;
    for (int u = 0; u < NUM_MAC; u++) begin
      arb_in_valid[u] = (arb_q[u].size() > 0) && ($urandom_range(0, 7) != 0);
      arb_in_data[u]  = (arb_q[u].size() > 0) ? arb_q[u][0] : '0;
      brb_in_valid[u] = (brb_q[u].size() > 0) && ($urandom_range(0, 7) != 0);
      brb_in_data[u]  = (brb_q[u].size() > 0) ? brb_q[u][0] : '0;
      out_ready[u]    = ($urandom_range(0, 4) != 0);
    end
  end

  // concurrency of the MAC units, seen from the ports: finished rows waiting side by side
  int ovalid_n;
  always @(posedge clk) begin
    ovalid_n = $countones(out_valid);
    if (ovalid_n >= 2) cnt_parallel++;
  end
  longint cycle = 0;
  always @(posedge clk) cycle++;

  task automatic wait_drain();
    int busy;
    do begin
      @(posedge clk);
      busy = 0;
      for (int u = 0; u < NUM_MAC; u++) busy += exp_q[u].size();
    end while (busy != 0);
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else $display("  %-36s %0d", what, n);
  endtask

  initial begin
    int dens, m, k;
    longint t0;
    arb_in_valid = '0; brb_in_valid = '0; out_ready = '0;
    for (int u = 0; u < NUM_MAC; u++) begin arb_in_data[u] = '0; brb_in_data[u] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // worked example 1: A has a00, a02, a13, a31, a33; B has b00, b02, b11, b12, b22
    clear_ab();
    A[0][0] = 3; A[0][2] = 5; A[1][3] = -2; A[3][1] = 7; A[3][3] = 4;
    B[0][0] = 2; B[0][2] = 6; B[1][1] = -3; B[1][2] = 9; B[2][2] = 11;
    load_product(4, 4);
    wait_drain();
    // worked example 2: A[0,0], A[3,1]; B[0,0], B[0,2], B[1,2], B[2,2]
    clear_ab();
    A[0][0] = 8; A[3][1] = -5;
    B[0][0] = 4; B[0][2] = 3; B[1][2] = 10; B[2][2] = 1;
    load_product(4, 4);
    wait_drain();
    // random C = A x A, 4 x 4, with varying density
    t0 = cycle;
    n_brb_entries = 0;
    for (int t = 0; t < 40; t++) begin
      dens = 1 + (t % 4);
      clear_ab();
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++)
        if ($urandom_range(0, 4) < dens) A[r][c] = rnd_val();
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) B[r][c] = A[r][c];
      load_product(4, 4);
    end
    wait_drain();
    // four MAC units must beat the one-product-per-cycle bound of a single MAC
    checks++;
    $display("  A x A batch: %0d multiplier steps in %0d cycles", n_brb_entries, cycle - t0);
    if (cycle - t0 >= longint'(n_brb_entries)) begin
      failures++;
      $display("FAIL: no speed-up from parallel MAC units");
    end
    // random rectangular A (m x k) x B (k x 4)
    for (int t = 0; t < 20; t++) begin
      m = int'($urandom_range(4, MAXD));
      k = int'($urandom_range(2, MAXD));
      clear_ab();
      for (int r = 0; r < m; r++) for (int c = 0; c < k; c++)
        if ($urandom_range(0, 9) < 3) A[r][c] = rnd_val();
      for (int r = 0; r < k; r++) for (int c = 0; c < N; c++)
        if ($urandom_range(0, 9) < 4) B[r][c] = rnd_val();
      load_product(m, k);
    end
    wait_drain();
    repeat (5) @(posedge clk);

    checks++;
    if (err != '0) begin failures++; $display("FAIL: err flag raised %b", err); end
    $display("rows checked %0d", cnt_rows);
    need("column with >= 2 partial sums", cnt_multi_acc);
    need("empty A row", cnt_empty_a);
    need("empty B row", cnt_empty_b);
    need("BRB full, loader stalled (cycles)", cnt_brb_full);
    need("C row held by back-pressure (cycles)", cnt_out_hold);
    need("cycles with >= 2 finished rows waiting", cnt_parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
