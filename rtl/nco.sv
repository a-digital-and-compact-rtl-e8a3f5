// nco -- numerically controlled oscillator with quadrature (sin, cos) outputs.
//
// The DMTD phase detector mixes both ADC channels with one pair of orthogonal local
// signals, sin(2*pi*f_NCO*t) and cos(2*pi*f_NCO*t), taken from a single oscillator so
// that their phase noise is common to both channels and cancels in the final phase
// difference. This module is that oscillator.
//
// How it works: a NCO_ACC_W-bit phase accumulator advances by the tuning word `ftw`
// every clock (f_NCO = ftw * Fs / 2^NCO_ACC_W). Its top PHASE_W bits drive a pipelined
// CORDIC in rotation mode, which turns the vector (AMP/K, 0) by that angle; the result's
// x is the cosine and y the sine. Computing sin and cos together in one pipeline keeps
// the two outputs exactly orthogonal and time-aligned, and needs no stored sine table.
// A pre-rotation by pi brings angles outside [-pi/2, pi/2) into the CORDIC's range.
//
// Interface: one output sample per clock. Timing: the outputs for accumulator value
// P appear ITER+2 clocks after P is in the accumulator; the delay is the same for sin
// and cos and, being common to both DMTD arms, drops out of the phase difference.
//
// The paper specifies an NCO with orthogonal outputs clocked from the sample clock; the
// CORDIC implementation, the accumulator width and the amplitude are this design's.
module nco
  import lock_pkg::*;
#(
  parameter int unsigned ACC_W = NCO_ACC_W,  // phase accumulator width
  parameter int unsigned OUT_W = SIN_W,      // signed output width
  parameter int unsigned ITER  = 16,         // CORDIC iterations
  parameter int          AMP   = 32000       // output amplitude, < 2^(OUT_W-1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [ACC_W-1:0]        ftw,      // frequency tuning word
  output logic signed [OUT_W-1:0] sin_o,
  output logic signed [OUT_W-1:0] cos_o
);

  localparam int unsigned XW = OUT_W + 2;        // headroom for CORDIC growth
  localparam int unsigned ZW = 24;               // angle width of the ATAN table
  // Start magnitude AMP / K, K = 1.64676 the CORDIC gain.
  localparam int X0 = (AMP * 10000 + 8234) / 16468;

  logic [ACC_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= acc + ftw;
  end

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic signed [ZW-1:0] zs [ITER+1];

  // Stage 0: quadrant pre-rotation.
  logic signed [ZW-1:0] ang;
  assign ang = acc[ACC_W-1 -: ZW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else if (ang[ZW-1] != ang[ZW-2]) begin
      // |angle| >= pi/2: start from -x0 and rotate by angle - pi.
      xs[0] <= XW'(-X0);
      ys[0] <= '0;
      zs[0] <= ang + {1'b1, {(ZW-1){1'b0}}};
    end else begin
      xs[0] <= XW'(X0);
      ys[0] <= '0;
      zs[0] <= ang;
    end
  end

  // Rotation stages.
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    logic signed [ZW-1:0] atan_i;
    assign atan_i = ZW'(ATAN_TAB[i]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
      end else if (!zs[i][ZW-1]) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - atan_i;
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + atan_i;
      end
    end
  end

  // Output register with saturation to OUT_W bits.
  function automatic logic signed [OUT_W-1:0] sat(input logic signed [XW-1:0] v);
    localparam logic signed [XW-1:0] MAXV = XW'((1 << (OUT_W-1)) - 1);
    localparam logic signed [XW-1:0] MINV = -MAXV - 1;
    if (v > MAXV)      return OUT_W'(MAXV);
    else if (v < MINV) return OUT_W'(MINV);
    else               return OUT_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sin_o <= '0;
      cos_o <= '0;
    end else begin
      sin_o <= sat(ys[ITER]);
      cos_o <= sat(xs[ITER]);
    end
  end

endmodule
