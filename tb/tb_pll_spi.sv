// tb_pll_spi -- self-checking testbench for the PLL command port.
//
// Sends commands to each of the three chip selects and rebuilds every frame with a
// receiver model that samples sdo on rising sclk while that chip's select is low.
// Checks: the frame and the selected chip, that no other select moves, the frame
// length (2*HALF*24 = 240 clocks with HALF = 5), `busy` and `done`, and that a command
// sent while busy is dropped and counted.
`timescale 1ns/1ps
module tb_pll_spi;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  logic [1:0] cmd_sel = 0;
  logic [23:0] cmd_frame = 0;
  logic busy, done, sclk, sdo;
  logic [7:0] dropped;
  logic [2:0] cs_n;
  int checks = 0, failures = 0;

  pll_spi dut (.*);

  always #5 clk = ~clk;

  logic [23:0] shreg;
  int nbits = 0;
  logic [2:0] seen;
  always @(posedge sclk) begin
    if (!cs_n[0] || !cs_n[1] || !cs_n[2]) begin
      shreg = {shreg[22:0], sdo}; nbits++;
      seen = seen | ~cs_n;
    end
  end

  task automatic send(input logic [1:0] sel, input logic [23:0] fr);
    longint t0, t1;
    @(posedge clk); #1;
    nbits = 0; seen = 0;
    cmd_valid = 1; cmd_sel = sel; cmd_frame = fr;
    @(posedge clk); #1;
    cmd_valid = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not raised"); end
    t0 = $time;
    wait (done); t1 = $time;
    @(posedge clk); #1;
    checks++;
    if (shreg !== fr || nbits != 24) begin
      failures++; $display("FAIL frame %h (%0d bits) expected %h", shreg, nbits, fr);
    end
    checks++;
    if (seen !== (3'b001 << sel)) begin failures++; $display("FAIL chip selects %b", seen); end
    checks++;
    if ((t1 - t0) / 10 < 235 || (t1 - t0) / 10 > 242) begin
      failures++; $display("FAIL frame time %0d clocks", (t1 - t0) / 10);
    end
    checks++;
    if (busy || cs_n !== 3'b111) begin failures++; $display("FAIL not idle after frame"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(2'd0, 24'h123456);
    send(2'd1, 24'hA5C3F0);
    send(2'd2, 24'h800001);
    for (int k = 0; k < 6; k++) send(2'($urandom_range(0, 2)), 24'($urandom));
    // a command while busy is dropped
    @(posedge clk); #1;
    cmd_valid = 1; cmd_sel = 1; cmd_frame = 24'h111111;
    @(posedge clk); #1;
    cmd_frame = 24'h222222; cmd_sel = 2;
    @(posedge clk); #1;
    cmd_valid = 0;
    wait (done);
    @(posedge clk); #1;
    checks++;
    if (shreg !== 24'h111111 || dropped != 8'd1) begin
      failures++; $display("FAIL drop: frame %h dropped %0d", shreg, dropped);
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
