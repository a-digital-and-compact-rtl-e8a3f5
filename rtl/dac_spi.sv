// dac_spi -- feedback DAC port: sends the controller output to the 20-bit DAC at a
// configurable update rate.
//
// The PID produces a new code once per measurement period, while the DAC is written at
// its own rate ("DAC feedback speed"), at most 1 MS/s for the 20-bit DAC of the
// reference board. This block decouples the two: a free-running divider issues an
// update every `div` clocks, and each update sends the most recent code.
//
// Frame format (this design's choice; the paper does not name the DAC part): 24 bits,
// MSB first, {CMD (4 bits, default 4'b0001 = write the DAC register), code (20 bits)},
// sent by spi_tx with sclk = clk / (2*HALF). With HALF = 1 a frame takes 48 clocks, so
// `div` is raised to at least MIN_DIV = 50 clocks (2 MS/s at 100 MHz, above the DAC's
// own limit).
//
// Interface: `code` is sampled at each update; cs_n is low during a frame. `updated`
// pulses when a frame has been sent and `code_sent` holds the code it carried.
// Timing: frames start exactly `div` clocks apart.
module dac_spi
  import lock_pkg::*;
#(
  parameter logic [3:0]  CMD  = 4'b0001,
  parameter int unsigned HALF = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  dac_code_t   code,
  input  logic [15:0] div,
  output logic        cs_n,
  output logic        sclk,
  output logic        sdo,
  output logic        updated,
  output dac_code_t   code_sent
);

  localparam int unsigned MIN_DIV = 2 * HALF * SPI_W + 2;

  logic [15:0] div_eff, tcnt;
  logic        tick, busy, active;

  assign div_eff = (div < 16'(MIN_DIV)) ? 16'(MIN_DIV) : div;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcnt <= '0;
      tick <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (tcnt + 1'b1 >= div_eff) begin
        tcnt <= '0;
        tick <= 1'b1;
      end else begin
        tcnt <= tcnt + 1'b1;
      end
    end
  end

  logic [SPI_W-1:0] frame;
  assign frame = {CMD, code};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              code_sent <= '0;
    else if (tick && !busy)  code_sent <= code;
  end

  spi_tx #(.W(SPI_W), .HALF(HALF)) u_tx (
    .clk, .rst_n,
    .start(tick), .data(frame),
    .busy, .done(updated), .active, .sclk, .sdo
  );

  assign cs_n = !active;

endmodule
