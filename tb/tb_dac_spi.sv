// tb_dac_spi -- self-checking testbench for the feedback DAC port.
//
// A receiver model in the testbench samples sdo on every rising sclk edge while cs_n is
// low and rebuilds each 24-bit frame. Checks: the frame is {4'b0001, code} for the code
// present at the update, frames start exactly `div` clocks apart (100 clocks, i.e.
// 1 MS/s at 100 MHz, and 250), a divider below the 48-clock frame length is raised to
// 50 clocks, and cs_n is low for exactly 48 clocks per frame.
`timescale 1ns/1ps
module tb_dac_spi;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  dac_code_t code = 0, code_sent;
  logic [15:0] div = 16'd100;
  logic cs_n, sclk, sdo, updated;
  int checks = 0, failures = 0;

  dac_spi dut (.*);

  always #5 clk = ~clk;

  // Receiver model.
  logic [23:0] shreg;
  int nbits = 0, nframes = 0;
  logic [23:0] frames [$];
  always @(posedge sclk) if (!cs_n) begin shreg = {shreg[22:0], sdo}; nbits++; end
  always @(posedge cs_n) if (rst_n) begin
    if (nbits != 24) begin failures++; $display("FAIL frame of %0d bits", nbits); end
    frames.push_back(shreg);
    nbits = 0; nframes++;
  end

  // Frame start times and cs_n low time, in clocks.
  longint cyc = 0, starts [$], low_cycles = 0;
  logic cs_q = 1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    cs_q <= cs_n;
    if (cs_q && !cs_n) starts.push_back(cyc);
    if (!cs_n) low_cycles <= low_cycles + 1;
  end

  task automatic measure(input int d, input int exp_spacing, input int nf);
    dac_code_t c;
    div = 16'(d);
    // let the current period finish
    repeat (300) @(posedge clk);
    frames.delete(); starts.delete();
    for (int k = 0; k < nf; k++) begin
      @(negedge cs_n);           // frame started: change the code for the next one
      #1;
      c = code;
      @(posedge cs_n); #1;
      checks++;
      if (frames[$] !== {4'b0001, c}) begin
        failures++; $display("FAIL frame %h expected %h", frames[$], {4'b0001, c});
      end
      checks++;
      if (code_sent !== c) begin failures++; $display("FAIL code_sent"); end
      code = 20'($urandom);
    end
    for (int k = 1; k < starts.size(); k++) begin
      checks++;
      if (starts[k] - starts[k-1] != exp_spacing) begin
        failures++; $display("FAIL spacing %0d expected %0d", starts[k] - starts[k-1], exp_spacing);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    code = 20'hABCDE;
    measure(100, 100, 10);
    measure(250, 250, 5);
    measure(10, 50, 10);
    // cs_n low time per frame
    begin
      longint l0;
      @(posedge cs_n); l0 = low_cycles;
      @(posedge cs_n);
      checks++;
      if (low_cycles - l0 != 48) begin failures++; $display("FAIL cs low %0d", low_cycles - l0); end
    end
    $display("frames=%0d", nframes);
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
