// tb_dmtd -- self-checking testbench for the DMTD phase detector.
//
// The testbench plays the two ADC channels. Checks: (1) valid_o rises after the
// pipeline latency plus the filter start-up hold-off (1050 clocks); (2) with both channels at the same frequency and a known phase
// offset, phase_o settles to phi_ref - phi_err (mean over 128 samples, 0.005 rad);
// (3) that result does not move when the NCO is retuned, because NCO phase is common
// to both arms and cancels; (4) with the error channel offset by +5e-4 Fs, and with
// a different nominal frequency (+2e-3 Fs), the phase advances at f_ref - f_err.
`timescale 1ns/1ps
module tb_dmtd;
  import lock_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam real TURN = 16777216.0;

  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc_ref = 0, adc_err = 0;
  logic [31:0] nco_ftw = 32'd425201762;   // 0.099 Fs
  logic [24:0] iq_alpha = 25'd2097152;
  phase_t theta1_o, theta2_o, phase_o;
  logic valid_o;
  int checks = 0, failures = 0;

  dmtd dut (.*);

  always #5 clk = ~clk;

  real fr, fe, pr, pe;   // phases in cycles
  real dphi;             // extra phase of the reference, radians
  always @(posedge clk) begin
    #1;
    pr += fr; pe += fe;
    adc_ref = 16'(int'(30000.0 * $sin(2.0 * PI * pr + dphi)));
    adc_err = 16'(int'(28000.0 * $sin(2.0 * PI * pe)));
  end

  function automatic real wrapd(input real d);
    while (d >  TURN / 2) d -= TURN;
    while (d < -TURN / 2) d += TURN;
    return d;
  endfunction

  task automatic static_check(input real target);
    real acc, e;
    repeat (300) @(posedge clk);
    acc = 0.0;
    e = target / (2.0 * PI) * TURN;
    for (int s = 0; s < 128; s++) begin
      @(posedge clk); #2;
      acc += wrapd(real'(phase_o) - e);
    end
    acc = acc / 128.0;
    checks++;
    if (acc > 0.005 / (2.0 * PI) * TURN || acc < -0.005 / (2.0 * PI) * TURN) begin
      failures++; $display("FAIL target=%f mean error %f LSB", target, acc);
    end
  endtask

  task automatic rate_check(input real expect_rate);
    real un, prev, rate;
    repeat (300) @(posedge clk);
    #2;
    prev = real'(phase_o); un = 0.0;
    for (int s = 0; s < 4000; s++) begin
      @(posedge clk); #2;
      un += wrapd(real'(phase_o) - prev);
      prev = real'(phase_o);
    end
    rate = un / 4000.0 / TURN;
    checks++;
    if ((rate - expect_rate) > 0.005 * (expect_rate > 0 ? expect_rate : -expect_rate) ||
        (expect_rate - rate) > 0.005 * (expect_rate > 0 ? expect_rate : -expect_rate)) begin
      failures++; $display("FAIL rate %f expected %f", rate, expect_rate);
    end
  endtask

  initial begin
    fr = 0.1; fe = 0.1; pr = 0.0; pe = 0.0; dphi = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1040) @(posedge clk);            // LAT + SETTLE = 26 + 1024 clocks
    checks++;
    if (valid_o) begin failures++; $display("FAIL valid early"); end
    repeat (20) @(posedge clk);
    checks++;
    if (!valid_o) begin failures++; $display("FAIL valid late"); end
    for (int k = 0; k < 6; k++) begin
      dphi = -3.0 + real'(k);
      static_check(dphi);
    end
    // retune the NCO: same difference
    nco_ftw = 32'd420906795;     // 0.098 Fs
    static_check(dphi);
    nco_ftw = 32'd433791000;     // ~0.101 Fs, above both inputs
    static_check(dphi);
    nco_ftw = 32'd425201762;
    dphi = 0.0;
    fe = 0.1005; rate_check(-0.0005);
    fe = 0.0995; rate_check(0.0005);
    fe = 0.102;  rate_check(-0.002);
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
