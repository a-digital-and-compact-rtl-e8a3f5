// tb_workloads -- the three published operating points, run on the full locking module
// at its default parameters.
//
// Each scenario resets the module, configures it over the register bus with the
// numbers of one published experiment and checks the outcome against the analog model
// in this testbench (reference, oscillator or laser, error amplification by m, DAC
// receiver), the same kind of model as in tb_dflm_top:
//
//   1. Noise floor: one 10 MHz source split into both ADC channels (independent ADC
//      noise), 100 kHz measurement rate (P = 1000), frequency filter at 100 Hz
//      (alpha = 1 - exp(-2 pi 100 / 1e5) = 105100 / 2^24). Checks: one result every
//      1000 clocks, mean frequency near 0, raw scatter below 1 Hz at f_e, and the
//      filter output scattering less than a fifth of the raw values (white noise
//      through this filter shrinks by sqrt(alpha / (2 - alpha)) = 0.056).
//   2. VCO lock: 10 MHz VCO with +-100 Hz tuning, m = 100, 100 kHz feedback, 300 Hz
//      filter (alpha = 313500 / 2^24), free-running 37 Hz off. Gains put the loop
//      crossover below the filter corner (integral gain 0.0128 per period against a
//      53-period filter time constant). Checks: lock well inside the published 1 s,
//      residual near zero, then a switch to a second frequency offset that is followed.
//   3. Laser lock: 50 MHz laser with +-400 Hz piezo range, m = 20, 1 kHz feedback
//      (P = 100 000 samples), 500 Hz filter (alpha = 16052204 / 2^24), free-running
//      150 Hz off, i.e. 3 kHz at f_e and 30 phase turns per measurement period.
//      Checks: free-run reading, lock, residual near zero.
//
// Scenario 3 uses the very first results after reset, so it also checks that the
// start-up of the I/Q filters does not leak into the measurement (the DMTD holds its
// output back until the filters have settled). All gains and coefficients are register
// values; the module itself runs with its default parameters.
//
// Timing checked: the measurement rate (one stream word per P clocks). Run time is a
// few million clocks; a watchdog stops it.
`timescale 1ns/1ps
module tb_workloads;
  import lock_pkg::*;

  localparam real PI      = 3.14159265358979;
  localparam real FS      = 100.0e6;
  localparam real FR      = 10.0e6;
  localparam real UNIT_HZ = FS / 281474976710656.0;  // Hz per frequency LSB

  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc_ref = 0, adc_err = 0;
  logic bus_wr_en = 0, bus_rd_en = 0;
  logic [7:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic bus_rd_valid, tx_valid;
  logic [63:0] tx_data;
  logic dac_cs_n, dac_sclk, dac_sdo;
  logic [2:0] pll_cs_n;
  logic pll_sclk, pll_sdo, locked, pid_sat;

  dflm_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- plant: f_e = f_r + m * (df0 + kv * (code - mid)) ----------------
  real m_fac = 100.0, df0 = 0.0, kv = 0.0;
  int  dac_code_m = 524288;
  real pr = 0.0, pe = 0.0;
  always @(posedge clk) begin
    real fe;
    #1;
    fe = FR + m_fac * (df0 + kv * real'(dac_code_m - 524288));
    pr += FR / FS; if (pr > 1.0) pr -= 1.0;
    pe += fe / FS; if (pe > 1.0) pe -= 1.0;
    adc_ref = 16'(int'(30000.0 * $sin(2.0 * PI * pr)) + int'($urandom_range(0, 6)) - 3);
    adc_err = 16'(int'(28000.0 * $sin(2.0 * PI * pe)) + int'($urandom_range(0, 6)) - 3);
  end

  // DAC receiver.
  logic [23:0] dsh = '0;
  int dbits = 0;
  always @(posedge dac_sclk) if (!dac_cs_n) begin dsh = {dsh[22:0], dac_sdo}; dbits++; end
  always @(posedge dac_cs_n) if (rst_n) begin
    if (dbits == 24 && dsh[23:20] == 4'b0001) dac_code_m = int'(dsh[19:0]);
    else begin failures++; $display("FAIL bad DAC frame %h (%0d bits)", dsh, dbits); end
    dbits = 0;
  end

  // Stream: last value and the clock count between words.
  longint f_last;
  longint cyc = 0, t_last = 0, t_gap = 0;
  always @(posedge clk) begin
    cyc++;
    if (tx_valid) begin
      f_last = longint'(signed'(tx_data[47:0]));
      t_gap  = cyc - t_last;
      t_last = cyc;
    end
  end

  // ---------------- bus helpers ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    bus_wr_en = 1; bus_addr = a; bus_wdata = d;
    @(posedge clk); #1;
    bus_wr_en = 0;
  endtask

  task automatic set_offset(input longint off);
    wr(REG_OFFSET_LO, off[31:0]);
    wr(REG_OFFSET_HI, {16'd0, off[47:32]});
  endtask

  task automatic do_reset();
    rst_n = 0;
    dac_code_m = 524288;
    repeat (5) @(posedge clk);
    dbits = 0;                                 // a frame cut off by the reset
    rst_n = 1;
    repeat (5) @(posedge clk);
  endtask

  // Common settings: NCO at 9.9 MHz, I/Q filter 1/32, loop open, DAC at mid scale.
  task automatic base_config(input int period, input int f_alpha);
    wr(REG_NCO_FTW, 32'd425201762);
    wr(REG_IQ_ALPHA, 32'd524288);
    wr(REG_PERIOD, period);
    wr(REG_F_ALPHA, f_alpha);
    set_offset(0);
    wr(REG_ILIM_LO, 32'd0);
    wr(REG_ILIM_HI, 32'd4096);                 // 2^44
    wr(REG_DAC_BIAS, 32'd524288);
    wr(REG_DAC_DIV, 32'd100);
    wr(REG_LOCK_TH_LO, 32'h1000_0000);   // about 95 Hz at f_e
    wr(REG_LOCK_TH_HI, 32'd0);
    wr(REG_LOCK_HOLD, 32'd10);
  endtask

  // Mean and standard deviation over n periods, of the raw stream and of the filter.
  task automatic stats(input int n, output real mean, output real sd, output real sd_filt);
    real s, s2, q, q2, x, y;
    s = 0; s2 = 0; q = 0; q2 = 0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk iff tx_valid); #1;
      x = real'(f_last);
      repeat (3) @(posedge clk);
      #1;
      y = real'(dut.u_flpf.y_o);
      s += x; s2 += x * x; q += y; q2 += y * y;
    end
    mean    = s / n;
    sd      = $sqrt((s2 / n - mean * mean) > 0.0 ? (s2 / n - mean * mean) : 0.0);
    sd_filt = $sqrt((q2 / n - (q / n) * (q / n)) > 0.0 ? (q2 / n - (q / n) * (q / n)) : 0.0);
  endtask

  task automatic wait_lock(input int max_periods, output int took);
    took = -1;
    for (int i = 0; i < max_periods; i++) begin
      @(posedge clk iff tx_valid);
      if (locked) begin took = i; break; end
    end
  endtask

  function automatic real hz(input real f_units);
    return f_units * UNIT_HZ;
  endfunction

  initial begin
    real mean, sd, sdf;
    int  took;

    // ---------------- 1. noise floor ----------------
    m_fac = 0.0; df0 = 0.0; kv = 0.0;          // both channels at exactly f_r
    do_reset();
    base_config(1000, 105100);                 // 100 kHz rate, 100 Hz filter
    stats(250, mean, sd, sdf);                 // let pipeline and filter settle
    stats(200, mean, sd, sdf);
    $display("noise floor: mean %.5f Hz, raw sd %.5f Hz, filtered sd %.6f Hz, gap %0d clocks",
             hz(mean), hz(sd), hz(sdf), t_gap);
    check("noise floor: one result per 1000 clocks (100 kHz)", t_gap == 1000);
    check("noise floor: mean below 0.05 Hz", hz(mean) < 0.05 && hz(mean) > -0.05);
    check("noise floor: raw scatter below 1 Hz", hz(sd) < 1.0);
    check("noise floor: filter reduces scatter 5x", sdf < 0.2 * sd);
    check("noise floor: not saturated", !pid_sat);

    // ---------------- 2. VCO lock ----------------
    m_fac = 100.0; df0 = 37.0; kv = 200.0 / 1048576.0;
    do_reset();
    base_config(1000, 313500);                 // 100 kHz feedback, 300 Hz filter
    wr(REG_KP, 32'd16);
    wr(REG_KI, 32'd4);
    wr(REG_KD, 32'd0);
    wr(REG_GAIN_SHIFT, 32'd24);
    stats(100, mean, sd, sdf);
    $display("VCO free run: %.1f Hz (expected %.1f)", hz(mean), -3700.0);
    check("VCO free-run reading", hz(mean) > -3718.5 && hz(mean) < -3681.5);
    wr(REG_CONTROL, 32'd1);
    wait_lock(3000, took);
    $display("VCO locked after %0d periods (%.2f ms)", took, real'(took) * 0.01);
    check("VCO locks within 1 s (100000 periods); here within 3000", took >= 0);
    stats(1200, mean, sd, sdf);               // slowest loop mode decays as exp(-n/106)
    stats(100, mean, sd, sdf);
    $display("VCO locked: mean %.4f Hz at f_e, DAC %0d", hz(mean), dac_code_m);
    check("VCO residual below 0.5 Hz at f_e", hz(mean) < 0.5 && hz(mean) > -0.5);
    check("VCO still locked", locked);
    set_offset(longint'(2.0e9));               // second offset, 710.5 Hz at f_e
    stats(1200, mean, sd, sdf);
    stats(100, mean, sd, sdf);
    $display("VCO offset 2: mean %.3f Hz (expected %.3f)", hz(mean), hz(2.0e9));
    check("VCO follows second offset", hz(mean - 2.0e9) < 0.5 && hz(mean - 2.0e9) > -0.5);
    check("VCO locked at second offset", locked);

    // ---------------- 3. laser lock ----------------
    m_fac = 20.0; df0 = 150.0; kv = 800.0 / 1048576.0;
    do_reset();
    base_config(100000, 16052204);             // 1 kHz feedback, 500 Hz filter
    wr(REG_KP, 32'd4);
    wr(REG_KI, 32'd16);
    wr(REG_KD, 32'd0);
    wr(REG_GAIN_SHIFT, 32'd20);
    stats(3, mean, sd, sdf);
    $display("laser free run: %.2f Hz (expected %.2f), gap %0d clocks", hz(mean), -3000.0, t_gap);
    check("laser: one result per 100000 clocks (1 kHz)", t_gap == 100000);
    check("laser free-run reading", hz(mean) > -3001.0 && hz(mean) < -2999.0);
    wr(REG_CONTROL, 32'd1);
    wait_lock(60, took);
    $display("laser locked after %0d periods (ms)", took);
    check("laser locks", took >= 0);
    stats(15, mean, sd, sdf);
    stats(5, mean, sd, sdf);
    $display("laser locked: mean %.4f Hz at f_e (%.5f Hz at the laser), DAC %0d",
             hz(mean), hz(mean) / 20.0, dac_code_m);
    check("laser residual below 0.1 Hz at f_e", hz(mean) < 0.1 && hz(mean) > -0.1);
    check("laser still locked", locked);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #120_000_000;   // 12 M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
