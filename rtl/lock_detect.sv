// lock_detect -- lock status detector.
//
// Reports whether the loop is locked: `locked` is raised once the measured frequency
// error has stayed inside a window for a given number of consecutive measurement
// periods, and dropped at the first measurement outside the window.
//
// How it works: on each frequency sample the error e = f - f_offset is compared with
// +-thresh (inclusive). A run counter counts consecutive in-window samples, saturating
// at `hold`; `locked` is high while the counter equals `hold`. An out-of-window sample
// clears the counter. hold = 0 makes `locked` follow the window test of the last sample.
//
// Interface: f_i is taken when valid_i is high; `locked` changes one clock after the
// sample that decides it. `in_window` shows the result of the last test.
//
// The paper gives the function (a locked flag when the frequency error stays within a
// specified range for a certain period) and feeds the detector from the frequency
// extraction; the run counter is this design's choice.
module lock_detect
  import lock_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  freq_t             f_i,
  input  freq_t             f_offset,
  input  logic [FREQ_W-2:0] thresh,
  input  logic [15:0]       hold,
  output logic              locked,
  output logic              in_window
);

  logic signed [FREQ_W:0] e;
  logic        [FREQ_W:0] mag;
  logic                   in_win;
  logic [15:0]            run;

  always_comb begin
    e      = (FREQ_W+1)'(f_i) - (FREQ_W+1)'(f_offset);
    mag    = e[FREQ_W] ? (FREQ_W+1)'(-e) : (FREQ_W+1)'(e);
    in_win = (mag <= (FREQ_W+1)'(thresh));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= '0;
      locked    <= 1'b0;
      in_window <= 1'b0;
    end else if (valid_i) begin
      in_window <= in_win;
      if (!in_win) begin
        run    <= '0;
        locked <= 1'b0;
      end else if (run < hold) begin
        run    <= run + 1'b1;
        locked <= (run + 1'b1 == hold);
      end else begin
        locked <= 1'b1;
      end
    end
  end

endmodule
