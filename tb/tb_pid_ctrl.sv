// tb_pid_ctrl -- self-checking testbench for the PID controller.
//
// Hand-worked cases first (a pure P step, the integrator summing, the derivative of a
// step, clamping at both DAC limits, the integrator clamp, open loop giving the bias),
// then random gains, shifts and inputs against a behavioural model of
//   u = bias + ((kp*e + ki*I + kd*(e - e_prev)) >>> shift), clamped to 0..2^20-1.
// Each result is expected exactly two clocks after its input sample.
`timescale 1ns/1ps
module tb_pid_ctrl;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  logic enable = 0, valid_i = 0, valid_o, sat_o;
  freq_t f_i = 0, f_offset = 0;
  logic signed [23:0] kp = 0, ki = 0, kd = 0;
  logic [5:0] gain_shift = 0;
  logic [62:0] integ_limit = '1;
  dac_code_t dac_bias = 20'h80000, dac_o;
  int checks = 0, failures = 0;

  pid_ctrl dut (.*);

  always #5 clk = ~clk;

  longint mi, me;   // model integrator and previous error

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // One sample; returns DAC code after exactly two clocks.
  task automatic step(input longint f, output longint code);
    @(posedge clk); #1;
    f_i = freq_t'(f); valid_i = 1;
    @(posedge clk); #1;
    valid_i = 0;
    checks++;
    if (valid_o) begin failures++; $display("FAIL valid too early"); end
    @(posedge clk); #1;
    checks++;
    if (!valid_o) begin failures++; $display("FAIL valid missing"); end
    code = longint'(dac_o);
  endtask

  function automatic longint model(input longint f);
    longint e, s, u, lim;
    e   = f - longint'(f_offset);
    lim = longint'(integ_limit);
    mi  = mi + e;
    if (mi > lim) mi = lim;
    if (mi < -lim) mi = -lim;
    s   = longint'(kp) * e + longint'(ki) * mi + longint'(kd) * (e - me);
    me  = e;
    u   = longint'(dac_bias) + (s >>> gain_shift);
    if (u > 1048575) u = 1048575;
    if (u < 0) u = 0;
    return u;
  endfunction

  initial begin
    longint c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // open loop: bias
    dac_bias = 20'd1000;
    step(12345, c); check("open loop", c, 1000);
    // P only: e = 60, kp = 3 -> 1180
    enable = 1; kp = 3; f_offset = 40;
    step(100, c); check("P", c, 1180);
    step(100, c); check("P again", c, 1180);
    // I only: integrator 60, 120, 180 with ki = 2
    enable = 0; step(0, c); enable = 1;
    kp = 0; ki = 2;
    step(100, c); check("I1", c, 1120);
    step(100, c); check("I2", c, 1240);
    step(100, c); check("I3", c, 1360);
    // integrator clamp at 150
    enable = 0; step(0, c); enable = 1;
    integ_limit = 63'd150;
    step(100, c); step(100, c); step(100, c);
    check("I clamp", c, 1300);
    // D only: kd = 5, error 0 then 60 -> 300, then 0
    enable = 0; step(0, c); enable = 1;
    integ_limit = '1; ki = 0; kd = 5;
    step(40, c);  check("D0", c, 1000);
    step(100, c); check("D step", c, 1300);
    step(100, c); check("D flat", c, 1000);
    // clamp high and low
    kd = 0; kp = 24'sd1000000;
    step(1000, c); check("clamp high", c, 1048575);
    checks++; if (!sat_o) begin failures++; $display("FAIL sat high"); end
    step(-1000, c); check("clamp low", c, 0);
    checks++; if (!sat_o) begin failures++; $display("FAIL sat low"); end
    // shift: kp = 1024, shift 10 -> u = bias + e
    kp = 1024; gain_shift = 10;
    step(77, c); check("shift", c, 1037);
    // random against the model
    enable = 0; step(0, c); enable = 1;
    mi = 0; me = 0;
    dac_bias = 20'h80000; f_offset = 48'sd5000; integ_limit = 63'd5000000;
    kp = 24'($urandom_range(0, 4000)) - 24'sd2000;
    ki = 24'($urandom_range(0, 400)) - 24'sd200;
    kd = 24'($urandom_range(0, 4000)) - 24'sd2000;
    gain_shift = 6'd6;
    for (int t = 0; t < 500; t++) begin
      longint f, e;
      f = longint'($urandom_range(0, 200000)) - 95000;
      e = model(f);
      step(f, c);
      check("random", c, e);
    end
    // opening the loop returns the bias at once
    enable = 0;
    @(posedge clk); #1;
    check("open again", longint'(dac_o), longint'(dac_bias));
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
