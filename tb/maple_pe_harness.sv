// maple_pe_harness: drives one maple_pe of a given configuration through C = A x A on random
// square sparse matrices and checks every C row; used by tb_maple_configs.
//
// For each density in DENS_PER_MILLE (non-zeros per thousand entries) it generates NMAT
// random DIM x DIM matrices A, streams the CSR rows to the MAC units round-robin (the ARB gets
// the non-zeros of row i, the BRB the rows of A selected by them, empty rows as marker
// entries), accepts rows with random back-pressure and compares each with a dense product.
// It reports the number of multiplier steps and cycles per density, raises done when all rows
// are back, and counts its checks and failures on its outputs.
`timescale 1ns/1ps
module maple_pe_harness
  import maple_pkg::*;
#(
  parameter int NUM_MAC = 2,
  parameter int N       = 64,
  parameter int DIM     = 64,
  parameter int NMAT    = 2,
  parameter int NDENS   = 4,
  parameter int DENS_PER_MILLE [NDENS] = '{11, 50, 120, 250}
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   multi_terms
);
  logic [NUM_MAC-1:0] arb_in_valid, arb_in_ready, brb_in_valid, brb_in_ready;
  logic [NUM_MAC-1:0] out_valid, out_ready, err;
  arb_entry_t arb_in_data [NUM_MAC];
  brb_entry_t brb_in_data [NUM_MAC];
  idx_t       out_i  [NUM_MAC];
  acc_t       out_c  [NUM_MAC][N];
  logic [N-1:0] out_nz [NUM_MAC];

  maple_pe #(.NUM_MAC(NUM_MAC), .N(N)) dut (.*);

  typedef struct { idx_t i; acc_t c [N]; logic [N-1:0] nz; } row_t;
  arb_entry_t arb_q [NUM_MAC][$];
  brb_entry_t brb_q [NUM_MAC][$];
  row_t       exp_q [NUM_MAC][$];
  int A [DIM][DIM];
  int next_mac = 0, steps = 0;
  longint cycle = 0;

  task automatic load_square();
    int rp [DIM+1];
    int cl [$], vl [$];
    rp[0] = 0;
    for (int r = 0; r < DIM; r++) begin
      for (int c = 0; c < DIM; c++) if (A[r][c] != 0) begin cl.push_back(c); vl.push_back(A[r][c]); end
      rp[r+1] = cl.size();
    end
    for (int r = 0; r < DIM; r++) begin
      int u = next_mac;
      row_t e;
      next_mac = (next_mac + 1) % NUM_MAC;
      e.i = idx_t'(r);
      e.nz = '0;
      for (int j = 0; j < N; j++) begin
        int h = 0;
        e.c[j] = '0;
        if (j < DIM)
          for (int k = 0; k < DIM; k++) if (A[r][k] != 0 && A[k][j] != 0) begin
            e.c[j] += acc_t'(A[r][k] * A[k][j]);
            e.nz[j] = 1'b1;
            h++;
          end
        if (h > 1) multi_terms++;
      end
      exp_q[u].push_back(e);
      if (rp[r+1] == rp[r]) begin
        arb_q[u].push_back('{rp: ptr_t'(rp[r]), rp_next: ptr_t'(rp[r]), i: idx_t'(r), col_id: '0, value: '0});
        steps++;
      end
      for (int p = rp[r]; p < rp[r+1]; p++) begin
        int kp = cl[p];
        arb_q[u].push_back('{rp: ptr_t'(rp[r]), rp_next: ptr_t'(rp[r+1]), i: idx_t'(r),
                             col_id: idx_t'(kp), value: data_t'(vl[p])});
        if (rp[kp+1] == rp[kp]) begin
          brb_q[u].push_back('{rp: ptr_t'(rp[kp]), rp_next: ptr_t'(rp[kp]), i_brb: idx_t'(kp), col_id: '0, value: '0});
          steps++;
        end
        for (int q = rp[kp]; q < rp[kp+1]; q++) begin
          brb_q[u].push_back('{rp: ptr_t'(rp[kp]), rp_next: ptr_t'(rp[kp+1]), i_brb: idx_t'(kp),
                               col_id: idx_t'(cl[q]), value: data_t'(vl[q])});
          steps++;
        end
      end
    end
  endtask

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      for (int u = 0; u < NUM_MAC; u++) begin
        if (arb_in_valid[u] && arb_in_ready[u]) void'(arb_q[u].pop_front());
        if (brb_in_valid[u] && brb_in_ready[u]) void'(brb_q[u].pop_front());
        if (out_valid[u] && out_ready[u]) begin
          row_t e;
          checks++;
          if (exp_q[u].size() == 0) begin
            failures++;
            $display("FAIL: %0d-MAC PE unit %0d: unexpected row", NUM_MAC, u);
          end else begin
            e = exp_q[u].pop_front();
            if (out_i[u] != e.i || out_nz[u] != e.nz || out_c[u] != e.c) begin
              failures++;
              $display("FAIL: %0d-MAC PE unit %0d row %0d (exp %0d)", NUM_MAC, u, out_i[u], e.i);
            end
          end
        end
      end
    end
  end

  always @(posedge clk) begin
    #1;
    for (int u = 0; u < NUM_MAC; u++) begin
      arb_in_valid[u] = (arb_q[u].size() > 0) && ($urandom_range(0, 15) != 0);
      arb_in_data[u]  = (arb_q[u].size() > 0) ? arb_q[u][0] : '0;
      brb_in_valid[u] = (brb_q[u].size() > 0) && ($urandom_range(0, 15) != 0);
      brb_in_data[u]  = (brb_q[u].size() > 0) ? brb_q[u][0] : '0;
      out_ready[u]    = ($urandom_range(0, 9) != 0);
    end
  end

  task automatic wait_drain();
    int busy;
    do begin
      @(posedge clk);
      busy = 0;
      for (int u = 0; u < NUM_MAC; u++) busy += exp_q[u].size();
    end while (busy != 0);
  endtask

  initial begin
    longint t0;
    done = 0; checks = 0; failures = 0; multi_terms = 0;
    arb_in_valid = '0; brb_in_valid = '0; out_ready = '0;
    for (int u = 0; u < NUM_MAC; u++) begin arb_in_data[u] = '0; brb_in_data[u] = '0; end
    wait (rst_n);
    for (int d = 0; d < NDENS; d++) begin
      steps = 0;
      t0 = cycle;
      for (int t = 0; t < NMAT; t++) begin
        for (int r = 0; r < DIM; r++) for (int c = 0; c < DIM; c++)
          A[r][c] = (int'($urandom_range(0, 999)) < DENS_PER_MILLE[d]) ? int'($urandom_range(1, 60)) - 30 : 0;
        load_square();
      end
      wait_drain();
      $display("  %2d-MAC PE, N=%0d, %0d x %0d at %0d/1000: %0d multiplier steps in %0d cycles (%0.2f steps/cycle)",
               NUM_MAC, N, DIM, DIM, DENS_PER_MILLE[d], steps, cycle - t0,
               real'(steps) / real'(cycle - t0));
    end
    repeat (3) @(posedge clk);
    checks++;
    if (err != '0) begin failures++; $display("FAIL: %0d-MAC PE raised err", NUM_MAC); end
    done = 1;
  end
endmodule
