// spi_tx -- write-only serial frame transmitter (SPI mode 0, MSB first).
//
// Helper shared by the DAC port (dac_spi) and the PLL command port (pll_spi). It
// shifts out one W-bit frame: `active` (chip select, active high here) is raised for the
// whole frame, `sclk` idles low, and `sdo` changes only while sclk is low, so the
// receiver samples on the rising edge.
//
// Interface: pulse `start` with `data` while `busy` is low. `done` pulses for one clock
// after the last bit. Timing: each half period of sclk lasts HALF clocks, so a frame
// takes 2 * HALF * W clocks from start to done.
module spi_tx #(
  parameter int unsigned W    = 24,
  parameter int unsigned HALF = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] data,
  output logic         busy,
  output logic         done,
  output logic         active,
  output logic         sclk,
  output logic         sdo
);

  logic [W-1:0]                sh;
  logic [$clog2(W+1)-1:0]      bitn;
  logic [$clog2(HALF+1)-1:0]   hcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh   <= '0;
      bitn <= '0;
      hcnt <= '0;
      sclk <= 1'b0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          sh   <= data;
          bitn <= ($bits(bitn))'(W);
          hcnt <= '0;
          sclk <= 1'b0;
          busy <= 1'b1;
        end
      end else if (hcnt == ($bits(hcnt))'(HALF - 1)) begin
        hcnt <= '0;
        if (!sclk) begin
          sclk <= 1'b1;
        end else begin
          sclk <= 1'b0;
          sh   <= sh << 1;
          bitn <= bitn - 1'b1;
          if (bitn == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end else begin
        hcnt <= hcnt + 1'b1;
      end
    end
  end

  assign active = busy;
  assign sdo    = busy & sh[W-1];

endmodule
