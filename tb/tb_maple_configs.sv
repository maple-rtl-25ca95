// tb_maple_configs: the two PE configurations of the evaluated accelerators, run on C = A x A.
//
// A Matraptor-style PE has two MAC units, an Extensor-style PE sixteen. Both are built here
// with 64 partial-sum registers per MAC and run the square product C = A x A (the way the
// evaluated accelerators are benchmarked) on random 64 x 64 matrices. The lowest density,
// 11 non-zeros per thousand, is that of the densest benchmark matrix (facebook, 1.1e-2);
// the benchmark matrices themselves are far too large for a 64-wide row and are not
// included. Every C row is compared with a dense product. The run fails if any row is wrong,
// if some column never needed more than one partial sum, or if the watchdog expires.
`timescale 1ns/1ps
module tb_maple_configs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done2, done16;
  int   chk2, chk16, fail2, fail16, multi2, multi16;

  maple_pe_harness #(.NUM_MAC(2),  .N(64), .DIM(64)) u_matraptor_pe (
    .clk, .rst_n, .done(done2), .checks(chk2), .failures(fail2), .multi_terms(multi2));
  maple_pe_harness #(.NUM_MAC(16), .N(64), .DIM(64)) u_extensor_pe (
    .clk, .rst_n, .done(done16), .checks(chk16), .failures(fail16), .multi_terms(multi16));

  int checks, failures;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done2 && done16);
    checks   = chk2 + chk16 + 1;
    failures = fail2 + fail16;
    if (multi2 == 0 || multi16 == 0) begin
      failures++;
      $display("FAIL: no multi-term accumulation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk2 + chk16, fail2 + fail16 + 1);
    $finish;
  end
endmodule
