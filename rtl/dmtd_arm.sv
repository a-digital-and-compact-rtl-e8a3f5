// dmtd_arm -- one arm of the ADC-based DMTD phase detector.
//
// An arm takes one ADC channel x(t) (the reference, or the amplified error signal) and
// the NCO's quadrature pair, and returns the phase of x relative to the NCO:
//     I = LPF(x * cos),  Q = LPF(x * sin),  theta = atan2(I, Q).
// For x = A sin(2*pi*f*t + phi) the filtered products are (A/2) sin(2*pi*(f - f_NCO)t
// + phi - phi_NCO) and (A/2) cos(...) respectively, so theta is the beat phase,
// which advances at f - f_NCO.
//
// How it works: two registered signed multipliers, each scaled to MIX_W bits, feed
// STAGES cascaded single-pole low-pass filters (iir_lpf) clocked every sample, and a
// pipelined CORDIC arctangent (cordic_atan2).
//
// Interface: one ADC sample, one NCO pair and one phase per clock; the ADC code is
// signed two's complement. Timing: latency is 1 (mixer) + STAGES (filters) +
// ITER + 2 (arctangent) clocks. Both arms of a DMTD have the same latency.
//
// The structure (mixers with cos and sin, low-pass filters, arctangent of I/Q) follows
// the paper; filter order, widths and scaling are this design's choices.
module dmtd_arm
  import lock_pkg::*;
#(
  parameter int unsigned STAGES = 2,   // cascaded low-pass sections per I and Q
  parameter int unsigned ITER   = 20   // arctangent CORDIC iterations
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [SIN_W-1:0] nco_sin,
  input  logic signed [SIN_W-1:0] nco_cos,
  input  logic [ALPHA_W:0]        alpha,     // I/Q filter coefficient, Q1.24
  output phase_t                  phase_o
);

  localparam int unsigned PW = ADC_W + SIN_W;
  localparam int unsigned SH = PW - MIX_W - 1;   // keeps |product| below 2^(MIX_W-1)

  logic signed [PW-1:0]    prod_i, prod_q;
  logic signed [MIX_W-1:0] mix_i, mix_q;

  assign prod_i = adc_i * nco_cos;
  assign prod_q = adc_i * nco_sin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_i <= '0;
      mix_q <= '0;
    end else begin
      mix_i <= MIX_W'(prod_i >>> SH);
      mix_q <= MIX_W'(prod_q >>> SH);
    end
  end

  logic signed [MIX_W-1:0] fi [STAGES+1];
  logic signed [MIX_W-1:0] fq [STAGES+1];
  assign fi[0] = mix_i;
  assign fq[0] = mix_q;

  for (genvar s = 0; s < STAGES; s++) begin : g_lpf
    logic vi_unused, vq_unused;
    iir_lpf #(.W(MIX_W), .AF(ALPHA_W)) u_lpf_i (
      .clk, .rst_n, .valid_i(1'b1), .x_i(fi[s]), .alpha,
      .valid_o(vi_unused), .y_o(fi[s+1])
    );
    iir_lpf #(.W(MIX_W), .AF(ALPHA_W)) u_lpf_q (
      .clk, .rst_n, .valid_i(1'b1), .x_i(fq[s]), .alpha,
      .valid_o(vq_unused), .y_o(fq[s+1])
    );
  end

  cordic_atan2 #(.IN_W(MIX_W), .ITER(ITER)) u_atan (
    .clk, .rst_n,
    .i_in(fi[STAGES]),
    .q_in(fq[STAGES]),
    .phase_o
  );

endmodule
