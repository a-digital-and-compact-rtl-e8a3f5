// seq_div -- sequential unsigned restoring divider, one quotient bit per clock.
//
// Helper of freq_extract, which divides the unwrapped phase advance of a measurement
// period by the period length. A NW-bit numerator is shifted through a DW+1 bit partial
// remainder; each clock the denominator is subtracted when it fits and the quotient bit
// is set. Division by zero returns all ones.
//
// Interface: pulse `start` with `num` and `den` while `busy` is low; `busy` stays high
// for NW clocks and `done` pulses for one clock with `quo` (the truncated quotient) and
// `rem` valid; both hold until the next start. Timing: done comes NW+1 clocks after
// start.
// Lint note: the partial remainder r is DW+1 bits so the compare sees the carry; its
// top bit never reaches `rem`, so the linter lists r[DW] as unused.
module seq_div #(
  parameter int unsigned NW = 81,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo,
  output logic [DW-1:0] rem
);

  logic [DW:0]            r;
  logic [NW-1:0]          q;
  logic [DW-1:0]          d;
  logic [$clog2(NW+1)-1:0] n;
  logic [DW:0]            r_sh;

  assign r_sh = {r[DW-1:0], q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r    <= '0;
      q    <= '0;
      d    <= '0;
      n    <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        r    <= '0;
        q    <= num;
        d    <= den;
        n    <= ($bits(n))'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        if (r_sh >= {1'b0, d}) begin
          r <= r_sh - {1'b0, d};
          q <= {q[NW-2:0], 1'b1};
        end else begin
          r <= r_sh;
          q <= {q[NW-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quo = q;
  assign rem = r[DW-1:0];

endmodule
