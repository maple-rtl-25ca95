// tb_maple_brb: self-checking test of the BRB FIFO (maple_brb) at its default depth.
//
// Random writes and pops run against a queue model. Every cycle the test compares the
// occupancy flags (in_ready low exactly when DEPTH entries are held, out_valid high exactly
// when one is held) and the head entry with the model. It requires the buffer to have been
// both full and empty, and checks that a written entry is readable in the very next cycle.
`timescale 1ns/1ps
module tb_maple_brb;
  import maple_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, pop;
  brb_entry_t in_data, out_data;

  maple_brb dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0, n_pass = 0;
  brb_entry_t model [$];

  function automatic brb_entry_t rnd_entry();
    brb_entry_t e;
    e = $bits(e)'({$urandom(), $urandom(), $urandom(), $urandom()});
    return e;
  endfunction

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(in_ready == (model.size() < DEPTH), "in_ready");
    check(out_valid == (model.size() > 0), "out_valid");
    if (model.size() > 0) check(out_data == model[0], "head entry");
    if (model.size() == DEPTH) n_full++;
    if (model.size() == 0) n_empty++;
    if (pop && out_valid) void'(model.pop_front());
    if (in_valid && in_ready) model.push_back(in_data);
  end

  int phase = 0;
  bit random_on = 1;
  always @(posedge clk) if (random_on) begin
    #1;
    // phases bias the traffic towards filling or draining the buffer
    in_valid = rst_n && ($urandom_range(0, 9) < ((phase != 0) ? 3 : 8));
    in_data  = rnd_entry();
    pop      = rst_n && (model.size() > 0) && ($urandom_range(0, 9) < ((phase != 0) ? 8 : 3));
  end

  initial begin
    in_valid = 0; pop = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      phase = r % 2;
      repeat (50) @(posedge clk);
    end
    // write into an empty buffer and read it one cycle later
    random_on = 0;
    @(posedge clk); #1; in_valid = 0;
    pop = out_valid;
    while (model.size() != 0) begin @(posedge clk); #1; pop = out_valid; end
    @(posedge clk); #2;
    in_valid = 1; in_data = rnd_entry(); pop = 0;
    @(posedge clk); #2;
    in_valid = 0;
    check(out_valid && out_data == in_data, "entry readable the cycle after its write");
    n_pass++;
    @(posedge clk);
    checks++;
    if (n_full == 0 || n_empty == 0) begin
      failures++;
      $display("FAIL: buffer never full (%0d) or never empty (%0d)", n_full, n_empty);
    end
    $display("cycles full %0d, empty %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
