// dmtd -- ADC-based dual-mixer time-difference (DMTD) phase detector.
//
// Measures the phase of the amplified error signal against the reference clock. Both
// ADC channels are demodulated by the same NCO (one dmtd_arm each), giving
//     theta1 = 2*pi*(f_r - f_NCO)*t + phi_r - phi_NCO      (reference arm)
//     theta2 = 2*pi*(f_e - f_NCO)*t + phi_e - phi_NCO      (error-signal arm)
// and the output is theta = theta1 - theta2 = 2*pi*(f_r - f_e)*t + phi_r - phi_e.
// The NCO's phase and phase noise appear in both arms and cancel in the difference,
// which is what distinguishes the DMTD scheme from demodulating one channel against the
// NCO alone. Because only the difference matters, the two inputs need not have the same
// nominal frequency and f_NCO only has to put both beat notes inside the I/Q filters'
// pass band.
//
// Interface: one sample per channel per clock (signed ADC codes); `phase_o` is a signed
// fraction of a turn (2^24 = 2*pi) wrapped to [-pi, pi), one per clock. `valid_o` rises
// LAT + SETTLE clocks after reset and then stays high: LAT = 1 + STAGES + ITER + 3 is
// the latency from the ADC inputs to phase_o, and SETTLE more samples let the I/Q
// filters charge up from zero (with the reset coefficient 1/32 the start-up error has
// decayed by e^-32 after 1024 samples), so the phase of a near-zero vector in the first
// samples is never passed on, where it could be counted as a spurious phase wrap.
//
// The subtraction order (reference minus error signal) follows the paper's eq. (11);
// the paper's Fig. 2(b) labels the arms the other way round, which only flips the sign
// of the measured frequency. The start-up hold-off (SETTLE) is this design's choice.
module dmtd
  import lock_pkg::*;
#(
  parameter int unsigned STAGES = 2,
  parameter int unsigned ITER   = 20,
  parameter int unsigned SETTLE = 1024   // samples of filter start-up before valid_o
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc_ref,   // reference (atomic clock) channel
  input  logic signed [ADC_W-1:0] adc_err,   // amplified error signal channel
  input  logic [NCO_ACC_W-1:0]    nco_ftw,
  input  logic [ALPHA_W:0]        iq_alpha,
  output phase_t                  theta1_o,  // reference arm phase
  output phase_t                  theta2_o,  // error arm phase
  output phase_t                  phase_o,   // theta1 - theta2
  output logic                    valid_o
);

  localparam int unsigned LAT = 1 + STAGES + ITER + 3;

  logic signed [SIN_W-1:0] s, c;

  nco u_nco (
    .clk, .rst_n, .ftw(nco_ftw), .sin_o(s), .cos_o(c)
  );

  dmtd_arm #(.STAGES(STAGES), .ITER(ITER)) u_arm_ref (
    .clk, .rst_n, .adc_i(adc_ref), .nco_sin(s), .nco_cos(c),
    .alpha(iq_alpha), .phase_o(theta1_o)
  );

  dmtd_arm #(.STAGES(STAGES), .ITER(ITER)) u_arm_err (
    .clk, .rst_n, .adc_i(adc_err), .nco_sin(s), .nco_cos(c),
    .alpha(iq_alpha), .phase_o(theta2_o)
  );

  // Wrapping subtraction: the PHASE_W-bit difference is again in [-pi, pi).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase_o <= '0;
    else        phase_o <= theta1_o - theta2_o;
  end

  localparam int unsigned FILL = LAT + SETTLE;

  logic [$clog2(FILL+1)-1:0] fill;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              fill <= '0;
    else if (fill != FILL[$bits(fill)-1:0])  fill <= fill + 1'b1;
  end
  assign valid_o = (fill == FILL[$bits(fill)-1:0]);

endmodule
