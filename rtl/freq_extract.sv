// freq_extract -- counter-based phase unwrapping and frequency averaging.
//
// The DMTD delivers a wrapped phase theta(n) in [-pi, pi) every sample. The average
// frequency over a measurement period of P sample intervals is
//     f = (theta_u(end) - theta_u(start)) / (2*pi * P * Ts),
// where theta_u is the unwrapped phase. Only the two end points are needed, plus the
// number of wraps in between: theta_u(end) = theta(end) + 2*pi*CNT. So instead of
// storing or averaging P frequency samples, the block keeps one start phase, the
// previous phase and a wrap counter CNT.
//
// How it works: for each new sample, d = theta(n) - theta(n-1) is formed without
// wrapping. A step below -pi means the phase passed +pi and came back at -pi (CNT + 1);
// a step of +pi or more means the opposite wrap (CNT - 1). After P intervals the phase
// advance  delta = theta(end) - theta(start) + CNT * 2^24  (in units of 2^-24 turn) is
// divided by P in a sequential divider, giving the frequency in units of Fs / 2^48
// (FREQ_W = 48). The end point of one period is the start point of the next, so
// periods follow each other without gaps, and CNT restarts at zero.
//
// Interface: phase_i is taken when phase_valid is high (one per clock at most).
// `period` is P in samples; values below MIN_PERIOD are raised to it, because the
// divider needs NW+1 clocks per result. freq_o and freq_valid (one-clock pulse) come
// NW+2 clocks after the last sample of a period; freq_o holds until the next result.
// wrap_up / wrap_dn pulse when the counter steps. Timing: one result per P samples.
//
// The counter method and the formula follow the paper (its Fig. 4 and eqs. 14-19); the
// widths, the gap-free chaining of periods and the divider are this design's choices.
// Lint note: the divider's busy flag and remainder are not needed (a period never ends
// while a division runs, see MIN_PERIOD), and of the saturated quotient only the low
// 48 bits are kept, so the linter lists these as unused.
module freq_extract
  import lock_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                phase_valid,
  input  phase_t              phase_i,
  input  logic [PERIOD_W-1:0] period,
  output logic                freq_valid,
  output freq_t               freq_o,
  output logic                wrap_up,
  output logic                wrap_dn
);

  localparam int unsigned DLT_W = PHASE_W + CNT_W + 1;     // phase advance width
  localparam int unsigned SH    = FREQ_W - PHASE_W;        // to units of Fs/2^FREQ_W
  localparam int unsigned NW    = DLT_W + SH;              // divider numerator width
  localparam int unsigned MIN_PERIOD = NW + 4;

  localparam logic signed [PHASE_W:0] HALF = (PHASE_W+1)'(1) <<< (PHASE_W-1);

  logic                       started;
  phase_t                     th_start, th_prev;
  logic signed [CNT_W-1:0]    cnt;
  logic [PERIOD_W-1:0]        n;
  logic [PERIOD_W-1:0]        p_eff;

  assign p_eff = (period < PERIOD_W'(MIN_PERIOD)) ? PERIOD_W'(MIN_PERIOD) : period;

  // Unwrapped step and wrap decision.
  logic signed [PHASE_W:0]  d;
  logic signed [CNT_W-1:0]  cnt_next;
  logic                     up, dn, last;
  always_comb begin
    d        = (PHASE_W+1)'(phase_i) - (PHASE_W+1)'(th_prev);
    up       = (d < -HALF);
    dn       = (d >= HALF);
    cnt_next = cnt + (up ? CNT_W'(1) : dn ? -CNT_W'(1) : '0);
    last     = (n + 1'b1 >= p_eff);
  end

  // Phase advance over the period just ended.
  logic signed [DLT_W-1:0] delta;
  assign delta = DLT_W'(phase_i) - DLT_W'(th_start)
               + (DLT_W'(cnt_next) <<< PHASE_W);

  logic [DLT_W-1:0] delta_mag;
  assign delta_mag = delta[DLT_W-1] ? DLT_W'(-delta) : DLT_W'(delta);

  logic                div_start, div_busy, div_done;
  logic [NW-1:0]       div_num, div_quo;
  logic [PERIOD_W-1:0] div_den, div_rem;
  logic                neg, neg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started   <= 1'b0;
      th_start  <= '0;
      th_prev   <= '0;
      cnt       <= '0;
      n         <= '0;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      neg       <= 1'b0;
      wrap_up   <= 1'b0;
      wrap_dn   <= 1'b0;
    end else begin
      div_start <= 1'b0;
      wrap_up   <= 1'b0;
      wrap_dn   <= 1'b0;
      if (phase_valid) begin
        th_prev <= phase_i;
        if (!started) begin
          started  <= 1'b1;
          th_start <= phase_i;
          cnt      <= '0;
          n        <= '0;
        end else begin
          wrap_up <= up;
          wrap_dn <= dn;
          if (last) begin
            th_start  <= phase_i;
            cnt       <= '0;
            n         <= '0;
            div_start <= 1'b1;
            neg       <= delta[DLT_W-1];
            div_num   <= NW'(delta_mag) << SH;
            div_den   <= p_eff;
          end else begin
            cnt <= cnt_next;
            n   <= n + 1'b1;
          end
        end
      end
    end
  end

  seq_div #(.NW(NW), .DW(PERIOD_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo), .rem(div_rem)
  );

  // Sign of the result in flight (a new period cannot start a division while busy).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         neg_q <= 1'b0;
    else if (div_start) neg_q <= neg;
  end

  // Signed, saturated result.
  localparam logic [NW-1:0] FMAX = NW'({1'b0, {(FREQ_W-1){1'b1}}});
  logic [NW-1:0] mag;
  assign mag = (div_quo > FMAX) ? FMAX : div_quo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_valid <= 1'b0;
      freq_o     <= '0;
    end else begin
      freq_valid <= div_done;
      if (div_done) freq_o <= neg_q ? -freq_t'(mag) : freq_t'(mag);
    end
  end

endmodule
