// cordic_atan2 -- four-quadrant arctangent, theta = atan2(I, Q), pipelined.
//
// In the DMTD phase detector each channel's low-pass filtered mixer products I and Q
// are turned into a phase, theta = arctan(I / Q), over the full circle. This module
// does it with a CORDIC in vectoring mode: the vector (x = Q, y = I) is rotated towards
// the positive x axis by the angles atan(2^-i), and the rotations are summed into the
// angle. A first step rotates vectors with Q < 0 by pi so every quadrant is covered.
//
// Output format: a signed 24-bit fraction of a turn, 2^24 = 2*pi, range [-pi, +pi).
// Its resolution is limited by ITER (about atan(2^-(ITER-1)) = 2^-(ITER+1) rad) and by
// the size of the input vector.
//
// Interface: one input pair and one phase per clock, no handshake. Timing: the phase
// for an input pair appears ITER+2 clocks after the pair is applied.
//
// The paper gives the arctangent of I/Q (its eqs. 9 and 10); the CORDIC, its width and
// the number of iterations are this design's choices.
module cordic_atan2
  import lock_pkg::*;
#(
  parameter int unsigned IN_W = MIX_W,  // signed input width
  parameter int unsigned ITER = 20      // CORDIC iterations, <= 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] i_in,   // sine-like component (numerator)
  input  logic signed [IN_W-1:0] q_in,   // cosine-like component (denominator)
  output phase_t                 phase_o
);

  localparam int unsigned XW = IN_W + 2;
  localparam int unsigned ZW = 24;

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [ZW-1:0] zs [ITER+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else if (q_in < 0) begin
      xs[0] <= -XW'(q_in);
      ys[0] <= -XW'(i_in);
      zs[0] <= {1'b1, {(ZW-1){1'b0}}};   // pi (== -pi)
    end else begin
      xs[0] <= XW'(q_in);
      ys[0] <= XW'(i_in);
      zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    logic signed [ZW-1:0] atan_i;
    assign atan_i = ZW'(ATAN_TAB[i]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
      end else if (!ys[i][XW-1]) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + atan_i;
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - atan_i;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase_o <= '0;
    else        phase_o <= phase_t'(zs[ITER]);
  end

endmodule
