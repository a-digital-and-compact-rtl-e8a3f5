// tb_ctrl_regs -- self-checking testbench for the control registers.
//
// Checks the reset configuration (loop open, 1000-sample period, 1 MS/s DAC rate), the
// ID register, write/read-back of every configuration register with its field width,
// that each write lands in the right field of the configuration record, the one-clock
// PLL command pulse, the status and last-frequency registers, the measurement stream,
// the one-clock read latency, and that unknown addresses read as zero.
`timescale 1ns/1ps
module tb_ctrl_regs;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic rd_valid;
  cfg_t cfg;
  logic pll_cmd_valid;
  logic [1:0] pll_cmd_sel;
  logic [23:0] pll_cmd_frame;
  logic locked = 0, pll_busy = 0, freq_valid = 0;
  freq_t freq = 0;
  dac_code_t dac_code = 0;
  logic tx_valid;
  logic [63:0] tx_data;
  int checks = 0, failures = 0;
  int n_pll = 0;

  ctrl_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (pll_cmd_valid) n_pll++;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); #1;
    wr_en = 1; addr = a; wdata = d;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk); #1;
    rd_en = 1; addr = a;
    @(posedge clk); #1;
    rd_en = 0;
    checks++;
    if (!rd_valid) begin failures++; $display("FAIL rd_valid"); end
    d = rdata;
  endtask

  // address, mask of implemented bits
  typedef struct { logic [7:0] a; logic [31:0] m; } reg_t;
  reg_t regs [] = '{
    '{8'h01, 32'hFFFF_FFFF}, '{8'h02, 32'h01FF_FFFF}, '{8'h03, 32'hFFFF_FFFF},
    '{8'h04, 32'h01FF_FFFF}, '{8'h05, 32'hFFFF_FFFF}, '{8'h06, 32'h0000_FFFF},
    '{8'h07, 32'h00FF_FFFF}, '{8'h08, 32'h00FF_FFFF}, '{8'h09, 32'h00FF_FFFF},
    '{8'h0A, 32'h0000_003F}, '{8'h0B, 32'hFFFF_FFFF}, '{8'h0C, 32'h7FFF_FFFF},
    '{8'h0D, 32'h0000_0001}, '{8'h0E, 32'h000F_FFFF}, '{8'h0F, 32'h0000_FFFF},
    '{8'h10, 32'hFFFF_FFFF}, '{8'h11, 32'h0000_7FFF}, '{8'h12, 32'h0000_FFFF}
  };

  initial begin
    logic [31:0] d, v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check("reset enable", cfg.pid_enable, 0);
    check("reset period", cfg.meas_period, 1000);
    check("reset dac div", cfg.dac_div, 100);
    rd(8'h00, d); check("id", d, 32'h444C_4D01);
    rd(8'h3F, d); check("unknown", d, 0);
    // write / read back all configuration registers
    foreach (regs[k]) begin
      v = $urandom;
      wr(regs[k].a, v);
      rd(regs[k].a, d);
      check($sformatf("readback %h", regs[k].a), d, v & regs[k].m);
    end
    // writes reach the right fields
    wr(8'h01, 32'd425201762);   check("ftw", cfg.nco_ftw, 425201762);
    wr(8'h03, 32'd2500);        check("period", cfg.meas_period, 2500);
    wr(8'h05, 32'hDEAD_BEEF);
    wr(8'h06, 32'h0000_8001);   check("offset", cfg.f_offset, 64'hFFFF_8001_DEAD_BEEF);
    wr(8'h07, 32'h00FF_FFFE);   check("kp", longint'(cfg.kp), -2);
    wr(8'h0D, 32'h1);           check("enable", cfg.pid_enable, 1);
    wr(8'h0E, 32'h12345);       check("bias", cfg.dac_bias, 32'h12345);
    wr(8'h12, 32'd7);           check("hold", cfg.lock_hold, 7);
    // PLL command: one pulse with select and frame
    fork
      wr(8'h13, 32'h02AB_CDEF);
      begin
        @(posedge clk); @(posedge clk); #1;
        check("pll valid", pll_cmd_valid, 1);
        check("pll sel", pll_cmd_sel, 2);
        check("pll frame", pll_cmd_frame, 24'hABCDEF);
      end
    join
    @(posedge clk); #1;
    check("pll pulse count", n_pll, 1);
    // status
    locked = 1; pll_busy = 0;
    rd(8'h14, d); check("status locked", d, 1);
    locked = 0; pll_busy = 1;
    rd(8'h14, d); check("status pll busy", d, 2);
    locked = 1; pll_busy = 1;
    rd(8'h14, d); check("status both", d, 3);
    // measurement stream and last frequency
    @(posedge clk); #1;
    freq = -48'sd123456789012; freq_valid = 1;
    @(posedge clk); #1;
    freq_valid = 0;
    check("tx valid", tx_valid, 1);
    check("tx data", tx_data, {15'd0, 1'b1, 48'(-48'sd123456789012)});
    @(posedge clk); #1;
    check("tx single", tx_valid, 0);
    rd(8'h15, d); check("freq lo", d, 32'(-64'sd123456789012));
    rd(8'h16, d); check("freq hi", d, longint'($unsigned(32'((-64'sd123456789012) >>> 32))));
    dac_code = 20'hBEEF1;
    rd(8'h17, d); check("dac code", d, 32'hBEEF1);
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
