// tb_cordic_atan2 -- self-checking testbench for the CORDIC arctangent.
//
// Applies random (I, Q) vectors of varied length in all four quadrants, one per clock,
// plus the axis cases, and compares each phase (ITER+2 clocks later) with
// atan2(I, Q) computed in floating point, in units of 2^-24 turn, modulo one turn.
`timescale 1ns/1ps
module tb_cordic_atan2;
  import lock_pkg::*;

  localparam int ITER = 20;
  localparam int LAT  = ITER + 2;
  localparam real PI  = 3.14159265358979;
  localparam int TOL  = 48;    // LSB of 2^-24 turn

  logic clk = 0, rst_n = 0;
  logic signed [23:0] i_in = 0, q_in = 0;
  phase_t ph;
  int checks = 0, failures = 0;

  cordic_atan2 #(.IN_W(24), .ITER(ITER)) dut (.clk, .rst_n, .i_in, .q_in, .phase_o(ph));

  always #5 clk = ~clk;

  real exp_q [$];

  function automatic real ref_turns(input int i, input int q);
    return $atan2(real'(i), real'(q)) / (2.0 * PI) * 16777216.0;
  endfunction

  task automatic apply(input int i, input int q);
    @(posedge clk); #1;
    i_in = 24'(i); q_in = 24'(q);
    exp_q.push_back(ref_turns(i, q));
  endtask

  // Checker: the output after each clock edge belongs to the input applied LAT edges ago.
  int applied = 0;
  always @(posedge clk) if (rst_n) begin
    #2;
    if (exp_q.size() > LAT) begin
      real e, d;
      e = exp_q.pop_front();
      d = real'(ph) - e;
      while (d >  8388608.0) d -= 16777216.0;
      while (d < -8388608.0) d += 16777216.0;
      checks++;
      if (d > TOL || d < -TOL) begin
        failures++;
        if (failures < 10) $display("FAIL phase=%0d expected=%f", ph, e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    apply(0, 1000000);       // 0
    apply(1000000, 0);       // +pi/2
    apply(0, -1000000);      // pi
    apply(-1000000, 0);      // -pi/2
    apply(-1000000, -1000);  // near -pi/2 from the left half
    apply(1000, -1000000);   // just below +pi
    apply(-1000, -1000000);  // just above -pi
    for (int t = 0; t < 3000; t++) begin
      int mag, i, q;
      real a;
      mag = 200000 + int'($urandom_range(0, 8000000));
      a   = real'($urandom) / 4294967296.0 * 2.0 * PI;
      i   = int'(real'(mag) * $sin(a));
      q   = int'(real'(mag) * $cos(a));
      apply(i, q);
    end
    repeat (LAT + 5) apply(0, 1000000);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
