// iir_lpf -- first-order (single-pole) IIR low-pass filter with a run-time coefficient.
//
// Used in two places: after each DMTD mixer, to keep the low beat-frequency product and
// remove the sum-frequency product, and on the extracted frequency, to remove noise
// outside the feedback bandwidth before the PID (for example a 300 Hz corner at a
// 100 kHz update rate, or 500 Hz at 1 kHz).
//
// How it works: on every input sample
//     y[n] = y[n-1] + alpha * (x[n] - y[n-1]),
// with alpha an unsigned Q1.AF number in (0, 1]; alpha = 2^AF passes the input through.
// The state keeps AF fraction bits so small steps are not lost. The -3 dB corner is
// about fc = alpha * f_update / (2*pi) for small alpha.
//
// Interface: x_i is taken when valid_i is high; y_o and valid_o follow one clock later
// and y_o holds between samples. alpha may change at any time; it acts from the next
// sample. Reset clears the state to zero.
//
// The paper names low-pass filters at both places and their corner frequencies but not
// their structure; the single-pole form is this design's choice.
// Lint note: the product alpha*(x - y) is formed one bit wider than the state can
// take; that top bit is a sign copy and is listed by the linter as unused.
module iir_lpf #(
  parameter int unsigned W  = 24,  // signed data width
  parameter int unsigned AF = 24   // fraction bits of alpha
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic signed [W-1:0] x_i,
  input  logic [AF:0]         alpha,   // Q1.AF, 0 < alpha <= 1.0
  output logic                valid_o,
  output logic signed [W-1:0] y_o
);

  localparam int unsigned SW = W + AF + 2;   // state width

  logic signed [SW-1:0]   acc;
  logic signed [W-1:0]    y;
  logic signed [W:0]      diff;
  logic signed [W+AF+2:0] step;

  assign y    = acc[AF +: W];
  assign diff = (W+1)'(x_i) - (W+1)'(y);
  assign step = (W+AF+3)'(diff) * $signed({1'b0, alpha});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) acc <= acc + SW'(step);
    end
  end

  assign y_o = y;

endmodule
