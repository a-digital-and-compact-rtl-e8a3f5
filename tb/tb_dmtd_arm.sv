// tb_dmtd_arm -- self-checking testbench for one DMTD arm.
//
// The testbench plays both the ADC (a 16-bit sine of amplitude 30000 plus a little
// noise) and the NCO (32000*sin, 32000*cos). (1) With the input at the NCO frequency
// and a phase offset phi, the arm's phase must settle to phi (mean over 128 samples,
// within 0.005 rad) for phi around the circle. (2) With the input 1/1000 of Fs above
// or below the NCO, the unwrapped phase must advance at +-1/1000 turn per sample
// (within 0.5 %).
`timescale 1ns/1ps
module tb_dmtd_arm;
  import lock_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam real TURN = 16777216.0;

  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc_i = 0, nco_sin = 0, nco_cos = 0;
  logic [24:0] alpha = 25'd2097152;   // 1/8
  phase_t phase_o;
  int checks = 0, failures = 0;

  dmtd_arm dut (.*);

  always #5 clk = ~clk;

  real fx, fn, phi;   // cycles per sample, radians
  longint n = 0;
  always @(posedge clk) begin
    #1;
    n++;
    adc_i   = 16'(int'(30000.0 * $sin(2.0 * PI * fx * real'(n) + phi)) + int'($urandom_range(0, 8)) - 4);
    nco_sin = 16'(int'(32000.0 * $sin(2.0 * PI * fn * real'(n))));
    nco_cos = 16'(int'(32000.0 * $cos(2.0 * PI * fn * real'(n))));
  end

  function automatic real wrapd(input real d);
    while (d >  TURN / 2) d -= TURN;
    while (d < -TURN / 2) d += TURN;
    return d;
  endfunction

  initial begin
    fx = 0.099; fn = 0.099; phi = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // (1) static phase
    for (int k = 0; k < 12; k++) begin
      real acc, e;
      phi = -PI + 0.2 + 2.0 * PI * real'(k) / 12.0;
      repeat (300) @(posedge clk);
      acc = 0.0;
      e = phi / (2.0 * PI) * TURN;
      for (int s = 0; s < 128; s++) begin
        @(posedge clk); #2;
        acc += wrapd(real'(phase_o) - e);
      end
      acc = acc / 128.0;
      checks++;
      if (acc > 0.005 / (2.0 * PI) * TURN || acc < -0.005 / (2.0 * PI) * TURN) begin
        failures++; $display("FAIL phi=%f mean error %f LSB", phi, acc);
      end
    end
    // (2) beat frequency of +-1e-3 turn per sample
    for (int sgn = -1; sgn <= 1; sgn += 2) begin
      real un, prev, rate;
      fx = fn + real'(sgn) * 0.001;
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
      if (rate * real'(sgn) < 0.000995 || rate * real'(sgn) > 0.001005) begin
        failures++; $display("FAIL rate %f expected %f", rate, real'(sgn) * 0.001);
      end
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
