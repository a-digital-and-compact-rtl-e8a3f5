// tb_iir_lpf -- self-checking testbench for the first-order IIR low-pass filter.
//
// Three parts: (1) random samples and coefficients against a bit-exact integer model
// of y += alpha*(x - y) kept in the testbench; (2) alpha = 1.0 must pass the input
// through unchanged; (3) a DC step must settle to the input, and an input alternating
// at Fs/2 must be attenuated to about alpha/(2-alpha) of its amplitude.
`timescale 1ns/1ps
module tb_iir_lpf;
  localparam int W = 24, AF = 24;

  logic clk = 0, rst_n = 0;
  logic valid_i = 0, valid_o;
  logic signed [W-1:0] x_i = 0, y_o;
  logic [AF:0] alpha = 0;
  int checks = 0, failures = 0;

  iir_lpf #(.W(W), .AF(AF)) dut (.*);

  always #5 clk = ~clk;

  longint acc_m;   // model state, y = acc_m >>> AF

  task automatic sample(input int x, input logic [AF:0] a, output int y);
    longint ym;
    @(posedge clk); #1;
    valid_i = 1; x_i = W'(x); alpha = a;
    ym = acc_m >>> AF;
    acc_m = acc_m + (longint'(x) - ym) * longint'(a);
    @(posedge clk); #1;
    valid_i = 0;
    y = int'(y_o);
    checks++;
    if (!valid_o || longint'(y) != (acc_m >>> AF)) begin
      failures++;
      if (failures < 10) $display("FAIL y=%0d model=%0d valid=%0b", y, acc_m >>> AF, valid_o);
    end
  endtask

  initial begin
    int y;
    acc_m = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // (1) random against the model
    for (int t = 0; t < 2000; t++)
      sample(int'($urandom_range(0, 16777215)) - 8388608, 25'($urandom_range(1, 16777216)), y);
    // (2) bypass
    for (int t = 0; t < 50; t++) begin
      int x;
      x = int'($urandom_range(0, 16777215)) - 8388608;
      sample(x, 25'd16777216, y);
      checks++;
      if (y != x) begin failures++; $display("FAIL bypass %0d %0d", y, x); end
    end
    // (3) step to DC with alpha = 1/16: within 1 LSB after 400 samples
    for (int t = 0; t < 400; t++) sample(1000000, 25'd1048576, y);
    checks++;
    if (y > 1000000 || y < 999999) begin failures++; $display("FAIL dc %0d", y); end
    // alternating +-1e6 around 0 with alpha = 1/16: amplitude ~ 1e6/31
    for (int t = 0; t < 400; t++) sample(1000000, 25'd1048576, y);
    begin
      int mx;
      mx = 0;
      for (int t = 0; t < 600; t++) begin
        sample((t % 2) ? 1000000 : -1000000, 25'd1048576, y);
        if (t > 400 && (y > mx || -y > mx)) mx = (y > 0) ? y : -y;
      end
      checks++;
      if (mx > 34000 || mx < 30000) begin failures++; $display("FAIL ripple %0d", mx); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
