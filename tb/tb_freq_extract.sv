// tb_freq_extract -- self-checking testbench for counter-based phase unwrapping.
//
// The testbench keeps a true, unwrapped phase (64-bit, units of 2^-24 turn) that
// advances by a per-period random rate plus per-sample jitter, always by less than half
// a turn per sample, and feeds the block only the wrapped 24-bit value. For every
// period of P samples the expected result is trunc((phi_end - phi_start) * 2^24 / P),
// computed from the true phase, so the block's wrap counting is checked against a
// phase it never sees. Rates of both signs and up to 0.45 turn per sample make the
// counter step in both directions and many times per period. It also checks that
// results arrive once per period, and that a period below the minimum is raised to it.
`timescale 1ns/1ps
module tb_freq_extract;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  logic phase_valid = 0;
  phase_t phase_i = 0;
  logic [31:0] period = 200;
  logic freq_valid, wrap_up, wrap_dn;
  freq_t freq_o;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0;

  freq_extract dut (.*);

  always #5 clk = ~clk;

  longint exp_q [$];
  longint valid_t [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (wrap_up) n_up++;
    if (wrap_dn) n_dn++;
    if (freq_valid) begin
      valid_t.push_back(cyc);
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected result");
      end else begin
        longint e;
        e = exp_q.pop_front();
        if (longint'(freq_o) != e) begin
          failures++;
          if (failures < 40) $display("FAIL freq=%0d expected=%0d at %0d", freq_o, e, checks);
        end
      end
    end
  end

  longint phi;

  task automatic run_periods(input int p_set, input int p_eff, input int nper, input int max_rate);
    for (int k = 0; k < nper; k++) begin
      longint start, rate, num, q;
      start = phi;
      rate  = longint'($urandom_range(0, 2 * max_rate)) - max_rate;
      for (int s = 0; s < p_eff; s++) begin
        longint step;
        step = rate + longint'($urandom_range(0, 2000)) - 1000;
        phi += step;
        @(posedge clk); #1;
        // the previous period's last sample was taken at this edge
        if (s == 0) period = 32'(p_set);
        phase_valid = 1;
        phase_i = phase_t'(phi);
      end
      num = (phi - start) * 64'sd16777216;
      q   = (num < 0) ? -((-num) / p_eff) : num / p_eff;
      exp_q.push_back(q);
    end
  endtask

  initial begin
    phi = 64'sd123456;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the first valid sample only sets the start point
    @(posedge clk); #1;
    phase_valid = 1; phase_i = phase_t'(phi);
    run_periods(200, 200, 20, 7500000);      // up to 0.45 turn per sample, both signs
    run_periods(1000, 1000, 5, 300000);
    run_periods(10, 85, 5, 2000000);         // below the minimum: raised to 85
    run_periods(150, 150, 5, 0);             // rate 0, jitter only
    @(posedge clk); #1; phase_valid = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    checks++;
    if (n_up == 0 || n_dn == 0) begin failures++; $display("FAIL wraps up=%0d dn=%0d", n_up, n_dn); end
    // spacing of results inside the first run = 200 clocks
    checks++;
    if (valid_t.size() > 3 && valid_t[2] - valid_t[1] != 200) begin
      failures++; $display("FAIL spacing %0d", valid_t[2] - valid_t[1]);
    end
    $display("wraps up=%0d down=%0d", n_up, n_dn);
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
