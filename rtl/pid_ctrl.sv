// pid_ctrl -- digital PID controller driving the feedback DAC.
//
// The controller acts on the error e = f - f_offset, where f is the filtered frequency
// difference between reference and amplified error signal and f_offset a set point.
// A non-zero set point locks the laser at a chosen offset from the reference rather
// than exactly onto it; changing it moves the lock point at run time.
//
// How it works: on each new frequency sample
//     e[n]   = f[n] - f_offset                  (saturated to FREQ_W bits)
//     I[n]   = clamp(I[n-1] + e[n], +-integ_limit)
//     u[n]   = dac_bias + ((kp*e[n] + ki*I[n] + kd*(e[n]-e[n-1])) >>> gain_shift)
// and u is clamped to the DAC range [0, 2^20-1]. Gains are signed, so the loop sign is
// set by software. With `enable` low the loop is open: the integrator and the stored
// error are cleared and the output is dac_bias (free-running laser). A clamped output
// is flagged on `sat_o`.
//
// Interface: f_i is taken when valid_i is high; dac_o and valid_o follow two clocks
// later (one clock for the error and integrator, one for the products and the sum).
// dac_o holds between updates.
//
// The paper specifies a PID acting on the filtered frequency minus a settable offset,
// with configurable parameters; the arithmetic form, the integrator clamp and all widths
// are this design's choices.
module pid_ctrl
  import lock_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic                     valid_i,
  input  freq_t                    f_i,
  input  freq_t                    f_offset,
  input  logic signed [GAIN_W-1:0] kp,
  input  logic signed [GAIN_W-1:0] ki,
  input  logic signed [GAIN_W-1:0] kd,
  input  logic [5:0]               gain_shift,
  input  logic [INTEG_W-2:0]       integ_limit,
  input  dac_code_t                dac_bias,
  output logic                     valid_o,
  output dac_code_t                dac_o,
  output logic                     sat_o
);

  localparam int unsigned PRW = GAIN_W + INTEG_W + 1;   // product width
  localparam int unsigned SUW = PRW + 2;                // sum width

  localparam logic signed [FREQ_W:0] EMAX = (FREQ_W+1)'({1'b0, {(FREQ_W-1){1'b1}}});

  // Stage 1: error, derivative term input and integrator.
  logic signed [INTEG_W-1:0] integ;
  freq_t                     e_cur, e_prev;
  logic                      v1;

  logic signed [FREQ_W:0]   e_wide;
  freq_t                    e_sat;
  logic signed [INTEG_W:0]  i_sum;
  logic signed [INTEG_W-1:0] lim, i_new;

  always_comb begin
    e_wide = (FREQ_W+1)'(f_i) - (FREQ_W+1)'(f_offset);
    if (e_wide > EMAX)            e_sat = freq_t'(EMAX);
    else if (e_wide < -EMAX)      e_sat = freq_t'(-EMAX);
    else                          e_sat = freq_t'(e_wide);
    lim   = $signed({1'b0, integ_limit});
    i_sum = (INTEG_W+1)'(integ) + (INTEG_W+1)'(e_sat);
    if (i_sum > (INTEG_W+1)'(lim))       i_new = lim;
    else if (i_sum < -(INTEG_W+1)'(lim)) i_new = -lim;
    else                                 i_new = INTEG_W'(i_sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ  <= '0;
      e_cur  <= '0;
      e_prev <= '0;
      v1     <= 1'b0;
    end else begin
      v1 <= valid_i;
      if (!enable) begin
        integ  <= '0;
        e_cur  <= '0;
        e_prev <= '0;
      end else if (valid_i) begin
        integ  <= i_new;
        e_prev <= e_cur;
        e_cur  <= e_sat;
      end
    end
  end

  // Stage 2: products, sum, scaling, bias and clamp.
  logic signed [PRW-1:0] p_term, i_term, d_term;
  logic signed [SUW-1:0] sum, shifted, u;

  localparam logic signed [SUW-1:0] UMAX = SUW'((1 << DAC_W) - 1);

  always_comb begin
    p_term  = PRW'(kp) * PRW'(e_cur);
    i_term  = PRW'(ki) * PRW'(integ);
    d_term  = PRW'(kd) * (PRW'(e_cur) - PRW'(e_prev));
    sum     = SUW'(p_term) + SUW'(i_term) + SUW'(d_term);
    shifted = sum >>> gain_shift;
    u       = shifted + SUW'($signed({1'b0, dac_bias}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      dac_o   <= '0;
      sat_o   <= 1'b0;
    end else begin
      valid_o <= v1;
      if (!enable) begin
        dac_o <= dac_bias;
        sat_o <= 1'b0;
      end else if (v1) begin
        if (u > UMAX) begin
          dac_o <= dac_code_t'(UMAX);
          sat_o <= 1'b1;
        end else if (u < 0) begin
          dac_o <= '0;
          sat_o <= 1'b1;
        end else begin
          dac_o <= dac_code_t'(u);
          sat_o <= 1'b0;
        end
      end
    end
  end

endmodule
