// tb_lock_detect -- self-checking testbench for the lock status detector.
//
// Feeds scripted sequences of frequency samples around a non-zero offset and checks
// `locked` after each: it must rise exactly on the hold-th consecutive sample inside
// the window (window edges inclusive, both signs), fall on the first sample outside,
// and a shorter run must not lock. Then random sequences against a run-counter model.
`timescale 1ns/1ps
module tb_lock_detect;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  logic valid_i = 0, locked, in_window;
  freq_t f_i = 0, f_offset = 48'sd1000000;
  logic [46:0] thresh = 47'd500;
  logic [15:0] hold = 16'd4;
  int checks = 0, failures = 0;

  lock_detect dut (.*);

  always #5 clk = ~clk;

  task automatic feed(input longint f, input bit exp_locked);
    @(posedge clk); #1;
    f_i = freq_t'(f); valid_i = 1;
    @(posedge clk); #1;
    valid_i = 0;
    checks++;
    if (locked !== exp_locked) begin
      failures++;
      if (failures < 10) $display("FAIL f=%0d locked=%0b expected=%0b", f, locked, exp_locked);
    end
  endtask

  initial begin
    int run;
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(1000000 + 501, 0);        // outside
    feed(1000000 + 500, 0);        // edge, inside, run 1
    feed(1000000 - 500, 0);        // run 2
    feed(1000000, 0);              // run 3
    feed(1000000 + 10, 1);         // run 4 -> locked
    feed(1000000 - 10, 1);
    feed(1000000 - 501, 0);        // out -> unlocked
    feed(1000000, 0);
    feed(1000000, 0);
    feed(1000000, 0);
    feed(-1000000, 0);             // far out, wrong sign
    for (int k = 0; k < 3; k++) feed(1000000, 0);
    feed(1000000, 1);
    // random against a model
    hold = 16'd3; run = 3;   // already locked: the run counter is saturated
    for (int t = 0; t < 2000; t++) begin
      longint f;
      bit in;
      f  = 1000000 + longint'($urandom_range(0, 1300)) - 650;
      in = (f - 1000000 <= 500) && (1000000 - f <= 500);
      run = in ? ((run < 3) ? run + 1 : 3) : 0;
      feed(f, run == 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
