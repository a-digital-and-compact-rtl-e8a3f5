// pll_spi -- command port from the FPGA to the PLL chips of the error amplification
// module (the configurable frequency generator, CFG, and the configurable frequency
// multipliers, CFMs).
//
// The multiplication factor of a CFM and the output frequency of the CFG are set by
// writing the PLL chips' registers. The PC sends each register write as one 24-bit
// frame plus a chip select number; this block queues one such command and shifts it out
// on a shared serial bus with one chip-select line per chip.
//
// How it works: a command (sel, frame) is accepted when `busy` is low; the chosen
// chip-select line goes low for the frame, sclk = clk / (2*HALF) (10 MHz at 100 MHz with
// the default HALF = 5), data MSB first, changing while sclk is low. The frame contents
// (register address and value of the PLL chip) are passed through unchanged.
//
// Interface: pulse `cmd_valid` with `cmd_sel` and `cmd_frame`; commands arriving while
// busy are dropped and counted in `dropped`. `done` pulses after each frame. Timing: a
// frame takes 2*HALF*24 clocks; busy rises the clock after cmd_valid.
//
// The paper shows command lines from the FPGA to the CFM and CFG (its Fig. 5) and a
// board with one CFG and two CFMs; the serial protocol and frame handling are this
// design's choices.
module pll_spi
  import lock_pkg::*;
#(
  parameter int unsigned NUM_CS = 3,   // CFG, CFM 0, CFM 1
  parameter int unsigned HALF   = 5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd_valid,
  input  logic [1:0]                cmd_sel,
  input  logic [SPI_W-1:0]          cmd_frame,
  output logic                      busy,
  output logic                      done,
  output logic [7:0]                dropped,
  output logic [NUM_CS-1:0]         cs_n,
  output logic                      sclk,
  output logic                      sdo
);

  logic [1:0] sel_q;
  logic       active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q   <= '0;
      dropped <= '0;
    end else if (cmd_valid) begin
      if (!busy)                 sel_q   <= cmd_sel;
      else if (dropped != 8'hFF) dropped <= dropped + 1'b1;
    end
  end

  spi_tx #(.W(SPI_W), .HALF(HALF)) u_tx (
    .clk, .rst_n,
    .start(cmd_valid), .data(cmd_frame),
    .busy, .done, .active, .sclk, .sdo
  );

  always_comb begin
    cs_n = '1;
    for (int k = 0; k < NUM_CS; k++)
      if (active && sel_q == 2'(k)) cs_n[k] = 1'b0;
  end

endmodule
