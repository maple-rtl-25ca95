// tb_maple_mac: self-checking test of one Maple MAC unit (maple_mac), N = 4.
//
// Random sparse A (m x k) and B (k x 4) are turned into the unit's two input streams: for
// every row i of A its non-zeros go to the ARB, and for every such non-zero A[i,k'] the
// non-zeros of row k' of B go to the BRB (an empty row of A or B is sent as one marker entry
// whose two row pointers are equal). Every C row coming out is compared with a dense product
// computed here, values and non-zero mask.
//
// Two phases: first with random input gaps and output back-pressure, then with both inputs
// always offered and out_ready held high, where the test checks the unit's rate exactly: a
// row costs one cycle per multiplier step (a product, or an empty B row) plus two, an empty A
// row one cycle plus two, and the first step comes one cycle after the first write.
`timescale 1ns/1ps
module tb_maple_mac;
  import maple_pkg::*;
  localparam int N    = 4;
  localparam int MAXD = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       arb_in_valid, arb_in_ready, brb_in_valid, brb_in_ready, out_valid, out_ready, err;
  arb_entry_t arb_in_data;
  brb_entry_t brb_in_data;
  idx_t       out_i;
  acc_t       out_c [N];
  logic [N-1:0] out_nz;

  maple_mac dut (.*);

  typedef struct { idx_t i; acc_t c [N]; logic [N-1:0] nz; } row_t;
  arb_entry_t aq [$];
  brb_entry_t bq [$];
  row_t       rq [$];
  int A [MAXD][MAXD];
  int B [MAXD][N];
  int checks = 0, failures = 0, steps = 0, nrows = 0, n_empty_a = 0, n_empty_b = 0, n_multi = 0;
  bit gaps = 1;

  task automatic load(int m, int k);
    int rpa [MAXD+1], rpb [MAXD+1];
    int ca [$], va [$], cb [$], vb [$];
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
      row_t e;
      e.i = idx_t'(r);
      e.nz = '0;
      for (int j = 0; j < N; j++) begin
        int h = 0;
        e.c[j] = '0;
        for (int kk = 0; kk < k; kk++) if (A[r][kk] != 0 && B[kk][j] != 0) begin
          e.c[j] += acc_t'(A[r][kk] * B[kk][j]);
          e.nz[j] = 1'b1;
          h++;
        end
        if (h > 1) n_multi++;
      end
      rq.push_back(e);
      nrows++;
      if (rpa[r+1] == rpa[r]) begin
        aq.push_back('{rp: ptr_t'(rpa[r]), rp_next: ptr_t'(rpa[r]), i: idx_t'(r), col_id: '0, value: '0});
        steps++;
        n_empty_a++;
      end
      for (int p = rpa[r]; p < rpa[r+1]; p++) begin
        int kp = ca[p];
        aq.push_back('{rp: ptr_t'(rpa[r]), rp_next: ptr_t'(rpa[r+1]), i: idx_t'(r),
                       col_id: idx_t'(kp), value: data_t'(va[p])});
        if (rpb[kp+1] == rpb[kp]) begin
          bq.push_back('{rp: ptr_t'(rpb[kp]), rp_next: ptr_t'(rpb[kp]), i_brb: idx_t'(kp), col_id: '0, value: '0});
          steps++;
          n_empty_b++;
        end
        for (int q = rpb[kp]; q < rpb[kp+1]; q++) begin
          bq.push_back('{rp: ptr_t'(rpb[kp]), rp_next: ptr_t'(rpb[kp+1]), i_brb: idx_t'(kp),
                         col_id: idx_t'(cb[q]), value: data_t'(vb[q])});
          steps++;
        end
      end
    end
  endtask

  task automatic random_matrices(output int m, output int k);
    m = int'($urandom_range(1, MAXD));
    k = int'($urandom_range(1, MAXD));
    for (int r = 0; r < MAXD; r++) for (int c = 0; c < MAXD; c++)
      A[r][c] = ($urandom_range(0, 9) < 3) ? int'($urandom_range(1, 200)) - 100 : 0;
    for (int r = 0; r < MAXD; r++) for (int c = 0; c < N; c++)
      B[r][c] = ($urandom_range(0, 9) < 4) ? int'($urandom_range(1, 200)) - 100 : 0;
  endtask

  longint cycle = 0, first_wr = -1, last_out = -1;
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (arb_in_valid && arb_in_ready) begin
        void'(aq.pop_front());
        if (first_wr < 0) first_wr = cycle;
      end
      if (brb_in_valid && brb_in_ready) void'(bq.pop_front());
      if (out_valid && out_ready) begin
        row_t e;
        last_out = cycle;
        checks++;
        if (rq.size() == 0) begin
          failures++;
          $display("FAIL: unexpected row %0d", out_i);
        end else begin
          e = rq.pop_front();
          if (out_i != e.i || out_c != e.c || out_nz != e.nz) begin
            failures++;
            $display("FAIL: row %0d (exp %0d) nz %b (exp %b)", out_i, e.i, out_nz, e.nz);
          end
        end
      end
    end
  end

  always @(posedge clk) begin
    #1;
    arb_in_valid = (aq.size() > 0) && (!gaps || $urandom_range(0, 5) != 0);
    arb_in_data  = (aq.size() > 0) ? aq[0] : '0;
    brb_in_valid = (bq.size() > 0) && (!gaps || $urandom_range(0, 5) != 0);
    brb_in_data  = (bq.size() > 0) ? bq[0] : '0;
    out_ready    = !gaps || ($urandom_range(0, 3) != 0);
  end

  initial begin
    int m, k;
    arb_in_valid = 0; brb_in_valid = 0; out_ready = 0; arb_in_data = '0; brb_in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random traffic
    for (int t = 0; t < 30; t++) begin
      random_matrices(m, k);
      load(m, k);
    end
    wait (rq.size() == 0);
    repeat (3) @(posedge clk);
    // phase 2: full-rate traffic, exact cycle count
    gaps = 0;
    steps = 0;
    nrows = 0;
    first_wr = -1;
    for (int t = 0; t < 10; t++) begin
      random_matrices(m, k);
      load(m, k);
    end
    wait (rq.size() == 0);
    @(posedge clk);
    checks++;
    $display("full rate: %0d rows, %0d steps, first write to last row %0d cycles (expected %0d)",
             nrows, steps, last_out - first_wr, longint'(steps + 2 * nrows));
    if (last_out - first_wr != longint'(steps + 2 * nrows)) begin
      failures++;
      $display("FAIL: rate differs from one step per cycle plus two cycles per row");
    end
    checks++;
    if (err) begin failures++; $display("FAIL: err raised"); end
    checks++;
    if (n_empty_a == 0 || n_empty_b == 0 || n_multi == 0) begin
      failures++;
      $display("FAIL: coverage empty A %0d empty B %0d multi %0d", n_empty_a, n_empty_b, n_multi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
