// tb_dflm_top -- closed-loop, end-to-end testbench of the locking module at its default
// parameters.
//
// The testbench models everything outside the FPGA:
//   * the reference: 10 MHz (0.1 Fs at Fs = 100 MS/s) sampled by a 16-bit ADC;
//   * a voltage-controlled 10 MHz oscillator standing in for the laser, with +-100 Hz
//     tuning over the 20-bit DAC range and a free-running error of +37 Hz;
//   * the error amplification stage with m = 100: f_e = f_r + 100 * df, sampled by the
//     second ADC channel (amplitude 28000 plus noise);
//   * a DAC receiver that decodes the serial frames and retunes the oscillator.
// The PC side is the register bus.
//
// The scenario: configure over the bus and send one PLL command; free run (loop open),
// where the measured frequency must equal f_r - f_e = -3700 Hz; close the loop and wait
// for the lock flag; switch the frequency offset to +1776 Hz and relock; ask for an
// offset the DAC cannot reach (controller saturates); go back to zero offset and
// relock; open the loop again. Values are checked against the oscillator model, so the
// whole chain (DMTD, unwrapping, filter, PID, DAC port) is checked together.
// Each mechanism is counted and a mechanism that never happens counts as a failure:
// phase wraps in both directions, lock and loss of lock, controller saturation, offset
// switches, open/closed loop switches, PLL command frames, DAC frames, stream words.
// The frequency filter uses a faster coefficient (0.5) than a 300 Hz corner so that
// the run stays short; that is a register value, not a parameter.
`timescale 1ns/1ps
module tb_dflm_top;
  import lock_pkg::*;

  localparam real PI      = 3.14159265358979;
  localparam real FS      = 100.0e6;
  localparam real FR      = 10.0e6;
  localparam real M       = 100.0;
  localparam real DF0     = 37.0;                    // free-running error, Hz
  localparam real KV      = 200.0 / 1048576.0;       // Hz per DAC code
  localparam real UNIT_HZ = FS / 281474976710656.0;  // Hz per frequency LSB (Fs/2^48)

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

  // ---------------- analog front end and oscillator model ----------------
  int  dac_code_m = 524288;
  real pr = 0.0, pe = 0.0;
  always @(posedge clk) begin
    real fe;
    #1;
    fe = FR + M * (DF0 + KV * real'(dac_code_m - 524288));
    pr += FR / FS; if (pr > 1.0) pr -= 1.0;
    pe += fe / FS; if (pe > 1.0) pe -= 1.0;
    adc_ref = 16'(int'(30000.0 * $sin(2.0 * PI * pr)) + int'($urandom_range(0, 6)) - 3);
    adc_err = 16'(int'(28000.0 * $sin(2.0 * PI * pe)) + int'($urandom_range(0, 6)) - 3);
  end

  // DAC receiver.
  logic [23:0] dsh;
  int dbits = 0, n_dac = 0;
  always @(posedge dac_sclk) if (!dac_cs_n) begin dsh = {dsh[22:0], dac_sdo}; dbits++; end
  always @(posedge dac_cs_n) if (rst_n) begin
    if (dbits == 24 && dsh[23:20] == 4'b0001) begin
      dac_code_m = int'(dsh[19:0]);
      n_dac++;
    end else begin
      failures++; $display("FAIL bad DAC frame %h (%0d bits)", dsh, dbits);
    end
    dbits = 0;
  end

  // PLL command receiver.
  logic [23:0] psh;
  int pbits = 0, n_pll = 0;
  logic [23:0] pll_frame;
  logic [2:0]  pll_sel_seen;
  always @(posedge pll_sclk) if (pll_cs_n != 3'b111) begin
    psh = {psh[22:0], pll_sdo}; pbits++; pll_sel_seen = ~pll_cs_n;
  end
  logic pll_active_q = 0;
  always @(posedge clk) begin
    if (rst_n && pll_active_q && pll_cs_n == 3'b111) begin
      pll_frame = psh; n_pll++;
      check("PLL frame 24 bits", pbits == 24);
      pbits = 0;
    end
    pll_active_q <= rst_n && (pll_cs_n != 3'b111);
  end

  // ---------------- measurement stream and mechanism counters ----------------
  longint f_last;
  int  n_tx = 0, n_up = 0, n_dn = 0, n_lock = 0, n_unlock = 0, n_sat = 0;
  int  n_offset_sw = 0, n_mode_sw = 0;
  logic locked_q = 0;
  always @(posedge clk) begin
    if (tx_valid) begin
      f_last = longint'(signed'(tx_data[47:0]));
      n_tx++;
    end
    if (dut.u_fext.wrap_up) n_up++;
    if (dut.u_fext.wrap_dn) n_dn++;
    if (pid_sat && tx_valid) n_sat++;
    locked_q <= locked;
    if (locked && !locked_q) n_lock++;
    if (!locked && locked_q) n_unlock++;
  end

  // ---------------- bus helpers ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    bus_wr_en = 1; bus_addr = a; bus_wdata = d;
    @(posedge clk); #1;
    bus_wr_en = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    bus_rd_en = 1; bus_addr = a;
    @(posedge clk); #1;
    bus_rd_en = 0;
    d = bus_rdata;
  endtask

  task automatic set_offset(input longint off);
    wr(REG_OFFSET_LO, off[31:0]);
    wr(REG_OFFSET_HI, {16'd0, off[47:32]});
    n_offset_sw++;
  endtask

  // Wait for n measurement periods; return the mean frequency of the last k of them.
  task automatic periods(input int n, input int k, output real mean);
    real acc;
    acc = 0.0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk iff tx_valid);
      #1;
      if (i >= n - k) acc += real'(f_last);
    end
    mean = acc / real'(k);
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

  // Expected DAC code for a frequency offset F (units): f_r - f_e = F.
  function automatic real code_for(input real f_units);
    return 524288.0 + (-hz(f_units) / M - DF0) / KV;
  endfunction

  initial begin
    logic [31:0] d;
    real mean, exp_f;
    int  took;

    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    rd(REG_ID, d);
    check("ID register", d == ID_VALUE);

    // Configuration from the PC.
    wr(REG_NCO_FTW, 32'd425201762);        // 9.9 MHz
    wr(REG_IQ_ALPHA, 32'd524288);          // 1/32
    wr(REG_PERIOD, 32'd1000);              // 10 us, 100 kHz feedback rate
    wr(REG_F_ALPHA, 32'd8388608);          // 0.5
    set_offset(0);
    wr(REG_KP, 32'd2);
    wr(REG_KI, 32'd4);
    wr(REG_KD, 32'd0);
    wr(REG_GAIN_SHIFT, 32'd20);
    wr(REG_ILIM_LO, 32'd0);
    wr(REG_ILIM_HI, 32'd64);               // 2^38
    wr(REG_DAC_BIAS, 32'd524288);
    wr(REG_DAC_DIV, 32'd100);              // 1 MS/s
    wr(REG_LOCK_TH_LO, 32'h1000_0000);     // 2^28 units, about 95 Hz at f_e
    wr(REG_LOCK_TH_HI, 32'd0);
    wr(REG_LOCK_HOLD, 32'd10);

    // One PLL command: multiplication factor word for CFM 0 (chip select 1).
    wr(REG_PLL_CMD, {6'd0, 2'd1, 24'h00_4064});
    repeat (300) @(posedge clk);
    check("PLL command frame", n_pll == 1 && pll_frame == 24'h00_4064 && pll_sel_seen == 3'b010);

    // Free run: loop open, DAC at the bias, measured f_r - f_e = -3700 Hz.
    periods(80, 40, mean);
    exp_f = -M * DF0 / UNIT_HZ;
    $display("free run: mean %.1f Hz, expected %.1f Hz, locked=%0b", hz(mean), hz(exp_f), locked);
    check("free-run frequency within 0.5 %", mean < exp_f * 0.995 && mean > exp_f * 1.005);
    check("DAC holds bias in free run", dac_code_m == 524288);
    check("not locked in free run", !locked);

    // Close the loop.
    wr(REG_CONTROL, 32'd1);
    n_mode_sw++;
    wait_lock(400, took);
    $display("locked after %0d periods", took);
    check("lock at zero offset", took >= 0);
    periods(60, 40, mean);
    $display("locked: mean %.3f Hz, DAC %0d (expected %.0f)", hz(mean), dac_code_m, code_for(0.0));
    check("locked frequency near zero (< 2 Hz at f_e)", hz(mean) < 2.0 && hz(mean) > -2.0);
    check("DAC code near the model's lock point",
          real'(dac_code_m) < code_for(0.0) + 300.0 && real'(dac_code_m) > code_for(0.0) - 300.0);
    rd(REG_STATUS, d);
    check("status bit", d[0] == 1'b1);

    // Switch to a +1776 Hz offset (f_e below f_r: the phase now advances).
    set_offset(longint'(5.0e9));
    periods(5, 1, mean);
    wait_lock(400, took);
    check("relock at offset 2", took >= 0);
    periods(120, 40, mean);
    $display("offset 2: mean %.3f Hz, expected %.3f Hz, DAC %0d (expected %.0f)",
             hz(mean), hz(5.0e9), dac_code_m, code_for(5.0e9));
    check("frequency follows offset 2", mean > 5.0e9 - 7.0e6 && mean < 5.0e9 + 7.0e6);

    // Unreachable offset: the controller saturates at DAC code 0.
    set_offset(longint'(3.0e10));
    periods(60, 10, mean);
    check("DAC clamps at 0", dac_code_m == 0);
    check("no lock when unreachable", !locked);

    // Back to zero offset.
    set_offset(0);
    wait_lock(800, took);
    $display("relocked after %0d periods", took);
    check("relock at zero offset", took >= 0);
    periods(40, 20, mean);
    check("frequency back near zero", hz(mean) < 2.0 && hz(mean) > -2.0);

    // Stream word matches the last-frequency register.
    @(posedge clk iff tx_valid); #1;
    begin
      logic [31:0] lo;
      rd(REG_FREQ_LO, lo);
      check("stream word equals FREQ_LO", lo == tx_data[31:0]);
    end

    // Open the loop: DAC returns to the bias.
    wr(REG_CONTROL, 32'd0);
    n_mode_sw++;
    periods(5, 1, mean);
    check("open loop returns to bias", dac_code_m == 524288);

    $display("mechanisms: wraps up=%0d down=%0d lock=%0d unlock=%0d sat=%0d offset_sw=%0d mode_sw=%0d pll=%0d dac_frames=%0d stream=%0d",
             n_up, n_dn, n_lock, n_unlock, n_sat, n_offset_sw, n_mode_sw, n_pll, n_dac, n_tx);
    check("phase wrap counted up", n_up > 0);
    check("phase wrap counted down", n_dn > 0);
    check("lock happened", n_lock > 0);
    check("loss of lock happened", n_unlock > 0);
    check("controller saturation happened", n_sat > 0);
    check("offset switch happened", n_offset_sw > 1);
    check("open/closed loop switch happened", n_mode_sw > 1);
    check("PLL command happened", n_pll > 0);
    check("DAC frames sent", n_dac > 0);
    check("stream words sent", n_tx > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40_000_000;   // 4 M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
