// tb_nco -- self-checking testbench for the quadrature NCO.
//
// Runs the NCO at several tuning words, keeps its own model of the phase accumulator,
// and compares sin_o / cos_o with 32000*sin / 32000*cos of the model phase delayed by
// the documented pipeline latency (ITER+2 clocks). Also checks that the output pair
// stays on a circle (orthogonality) and that a tuning word of 0 gives a constant.
`timescale 1ns/1ps
module tb_nco;
  import lock_pkg::*;

  localparam int ITER = 16;
  localparam int LAT  = ITER + 2;
  localparam real AMP = 32000.0;
  localparam real PI  = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic [31:0] ftw;
  logic signed [15:0] s, c;
  int checks = 0, failures = 0;

  nco #(.ITER(ITER)) dut (.clk, .rst_n, .ftw, .sin_o(s), .cos_o(c));

  always #5 clk = ~clk;

  // Model accumulator history, indexed by clock count since reset release.
  logic [31:0] hist [0:4095];
  int          k;

  task automatic run_word(input logic [31:0] w, input int n);
    rst_n = 0; ftw = w;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    k = 0; hist[0] = 0;
    for (int j = 1; j <= n; j++) begin
      @(posedge clk); #1;
      hist[j] = hist[j-1] + w;
      if (j >= LAT + 1) begin
        real ph, es, ec, r;
        ph = real'(hist[j - LAT]) / 4294967296.0 * 2.0 * PI;
        es = AMP * $sin(ph);
        ec = AMP * $cos(ph);
        checks++;
        if ((real'(s) - es) > 12.0 || (es - real'(s)) > 12.0 ||
            (real'(c) - ec) > 12.0 || (ec - real'(c)) > 12.0) begin
          failures++;
          if (failures < 10) $display("FAIL ftw=%h j=%0d sin=%0d exp=%f cos=%0d exp=%f", w, j, s, es, c, ec);
        end
        r = $sqrt(real'(s) * real'(s) + real'(c) * real'(c));
        checks++;
        if (r > AMP + 15.0 || r < AMP - 15.0) begin
          failures++;
          if (failures < 10) $display("FAIL radius %f", r);
        end
      end
    end
  endtask

  initial begin
    ftw = 0;
    run_word(32'd425201762, 600);     // 9.9 MHz at 100 MS/s
    run_word(32'h8000_0001, 200);     // close to Fs/2
    run_word(32'd3, 100);             // very slow
    run_word(32'hF000_0000, 200);     // negative frequency
    for (int t = 0; t < 4; t++) run_word($urandom, 200);
    // ftw = 0: output constant cos = AMP, sin = 0
    run_word(32'd0, 60);
    checks++;
    if (s > 12 || s < -12 || c < 31988) begin failures++; $display("FAIL dc %0d %0d", s, c); end
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
