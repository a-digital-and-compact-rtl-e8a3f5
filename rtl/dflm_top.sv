// dflm_top -- digital frequency locking module: the FPGA part of a pulse-laser
// repetition-rate lock.
//
// Outside the FPGA an error amplification stage multiplies the laser repetition rate
// f_x = f_0 + df by m, mixes it with m*f_0 - f_r made from an atomic clock, and so
// produces an error signal f_e = f_r + m*df at the reference frequency f_r, with the
// repetition-rate error amplified m times. Two ADC channels sample f_r and f_e.
// This module measures f_r - f_e (= -m*df) and steers the laser through a DAC:
//
//   adc_ref, adc_err -> dmtd          phase theta = theta_ref - theta_err, every sample
//                    -> freq_extract  counter-based unwrapping, mean frequency per period
//                    -> iir_lpf       low-pass on the frequency
//                    -> pid_ctrl      PID on (frequency - offset)
//                    -> dac_spi       20-bit DAC, written at its own update rate
//   freq_extract     -> lock_detect   locked flag
//   ctrl_regs        <- register bus from the PC link; streams measurements back
//   pll_spi          <- PLL commands (multiplication factor, mixing frequency)
//
// Interface: one clock, the ADC sample clock (100 MHz on the reference board); ADC
// codes are signed. The register bus and the measurement stream are described in
// ctrl_regs, the serial ports in dac_spi and pll_spi. After reset the loop is open
// (DAC at its bias), the measurement period is 1000 samples (100 kHz at 100 MS/s) and
// the DAC is updated every 100 clocks (1 MS/s).
//
// Timing: the DMTD has a fixed latency of 26 clocks; a frequency value appears
// about 90 clocks after the end of its measurement period; the filter and the PID add
// three clocks; the DAC picks the new code up at its next update.
//
// The chain and its blocks follow the paper's description of the FPGA firmware; the
// single clock domain, the register bus and the serial formats are this design's own.
//
// Lint notes: the arm phases, wrap pulses, window flag, frame-done pulses, the PLL
// drop counter and the PID strobe of the sub-blocks are not used at this level (they
// serve the blocks' own tests and debugging), so the linter lists them as unused. The
// rst_n net is also reported as used both asynchronously and synchronously: the second
// use is only the `disable iff` of the bus assertion in ctrl_regs.
module dflm_top
  import lock_pkg::*;
#(
  parameter int unsigned IQ_STAGES = 2,    // low-pass sections per DMTD I/Q path
  parameter int unsigned ATAN_ITER = 20,   // arctangent CORDIC iterations
  parameter int unsigned PLL_CS    = 3     // PLL chips: CFG, CFM 0, CFM 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC channels
  input  logic signed [ADC_W-1:0] adc_ref,
  input  logic signed [ADC_W-1:0] adc_err,
  // register bus (network interface side)
  input  logic                    bus_wr_en,
  input  logic                    bus_rd_en,
  input  logic [7:0]              bus_addr,
  input  logic [31:0]             bus_wdata,
  output logic [31:0]             bus_rdata,
  output logic                    bus_rd_valid,
  // measurement stream to the network interface
  output logic                    tx_valid,
  output logic [63:0]             tx_data,
  // feedback DAC
  output logic                    dac_cs_n,
  output logic                    dac_sclk,
  output logic                    dac_sdo,
  // PLL command port
  output logic [PLL_CS-1:0]       pll_cs_n,
  output logic                    pll_sclk,
  output logic                    pll_sdo,
  // status
  output logic                    locked,
  output logic                    pid_sat
);

  cfg_t cfg;

  // Phase detector.
  phase_t th1, th2, phase;
  logic   phase_valid;

  dmtd #(.STAGES(IQ_STAGES), .ITER(ATAN_ITER)) u_dmtd (
    .clk, .rst_n, .adc_ref, .adc_err,
    .nco_ftw(cfg.nco_ftw), .iq_alpha(cfg.iq_alpha),
    .theta1_o(th1), .theta2_o(th2), .phase_o(phase), .valid_o(phase_valid)
  );

  // Frequency extraction.
  freq_t f_raw;
  logic  f_valid, wrap_up, wrap_dn;

  freq_extract u_fext (
    .clk, .rst_n, .phase_valid, .phase_i(phase), .period(cfg.meas_period),
    .freq_valid(f_valid), .freq_o(f_raw), .wrap_up, .wrap_dn
  );

  // Low-pass filter on the frequency.
  freq_t f_filt;
  logic  ff_valid;

  iir_lpf #(.W(FREQ_W), .AF(ALPHA_W)) u_flpf (
    .clk, .rst_n, .valid_i(f_valid), .x_i(f_raw), .alpha(cfg.f_alpha),
    .valid_o(ff_valid), .y_o(f_filt)
  );

  // PID.
  dac_code_t dac_code;
  logic      pid_valid;

  pid_ctrl u_pid (
    .clk, .rst_n, .enable(cfg.pid_enable), .valid_i(ff_valid), .f_i(f_filt),
    .f_offset(cfg.f_offset), .kp(cfg.kp), .ki(cfg.ki), .kd(cfg.kd),
    .gain_shift(cfg.gain_shift), .integ_limit(cfg.integ_limit),
    .dac_bias(cfg.dac_bias), .valid_o(pid_valid), .dac_o(dac_code), .sat_o(pid_sat)
  );

  // Lock status.
  logic in_window;

  lock_detect u_lock (
    .clk, .rst_n, .valid_i(f_valid), .f_i(f_raw), .f_offset(cfg.f_offset),
    .thresh(cfg.lock_thresh), .hold(cfg.lock_hold), .locked, .in_window
  );

  // DAC port.
  logic      dac_updated;
  dac_code_t dac_sent;

  dac_spi u_dac (
    .clk, .rst_n, .code(dac_code), .div(cfg.dac_div),
    .cs_n(dac_cs_n), .sclk(dac_sclk), .sdo(dac_sdo),
    .updated(dac_updated), .code_sent(dac_sent)
  );

  // PLL command port.
  logic             pll_cmd_valid, pll_busy, pll_done;
  logic [1:0]       pll_cmd_sel;
  logic [SPI_W-1:0] pll_cmd_frame;
  logic [7:0]       pll_dropped;

  pll_spi #(.NUM_CS(PLL_CS)) u_pll (
    .clk, .rst_n, .cmd_valid(pll_cmd_valid), .cmd_sel(pll_cmd_sel),
    .cmd_frame(pll_cmd_frame), .busy(pll_busy), .done(pll_done),
    .dropped(pll_dropped), .cs_n(pll_cs_n), .sclk(pll_sclk), .sdo(pll_sdo)
  );

  // Control registers.
  ctrl_regs u_ctrl (
    .clk, .rst_n,
    .wr_en(bus_wr_en), .rd_en(bus_rd_en), .addr(bus_addr), .wdata(bus_wdata),
    .rdata(bus_rdata), .rd_valid(bus_rd_valid),
    .cfg,
    .pll_cmd_valid, .pll_cmd_sel, .pll_cmd_frame,
    .locked, .pll_busy, .freq_valid(f_valid), .freq(f_raw), .dac_code,
    .tx_valid, .tx_data
  );

endmodule
