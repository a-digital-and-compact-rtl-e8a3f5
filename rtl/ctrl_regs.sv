// ctrl_regs -- control module between the PC link and the locking datapath.
//
// Everything the loop can be tuned with is a register here, written by the PC over the
// network link: NCO frequency, filter coefficients, measurement period, frequency
// offset (set point), PID gains, integrator clamp, loop enable, DAC bias and update
// rate, lock window, and commands for the PLL chips that set the multiplication factor
// and the mixing frequency. In the other direction the block returns status (lock flag,
// last frequency, last DAC code) on register reads and streams every frequency
// measurement to the link as it is produced.
//
// How it works: a simple synchronous register bus. A write (`wr_en`) updates the
// addressed register at the clock edge; a read (`rd_en`) returns the word on `rdata`
// with `rd_valid` one clock later. Values wider than 32 bits use a LO/HI register pair.
// A write to REG_PLL_CMD does not store anything: it issues one PLL command pulse.
// The register map is lock_pkg::reg_addr_e; reset values are lock_pkg::CFG_RESET
// (loop open). Unknown addresses read as zero and ignore writes.
//
// The measurement stream carries {15'b0, locked, frequency[47:0]} in 64 bits, one word
// per measurement period, with `tx_valid` for one clock.
//
// The paper names this block and lists what is configurable; the register layout, the
// bus and the stream format are this design's choices. The bus runs on the sample clock.
// An assertion checks that read and write are never requested together; its
// `disable iff (!rst_n)` makes the linter report rst_n as a synchronous use too.
module ctrl_regs
  import lock_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // register bus from the network interface
  input  logic              wr_en,
  input  logic              rd_en,
  input  logic [7:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  output logic              rd_valid,
  // configuration to the datapath
  output cfg_t              cfg,
  // PLL command
  output logic              pll_cmd_valid,
  output logic [1:0]        pll_cmd_sel,
  output logic [SPI_W-1:0]  pll_cmd_frame,
  // status from the datapath
  input  logic              locked,
  input  logic              pll_busy,
  input  logic              freq_valid,
  input  freq_t             freq,
  input  dac_code_t         dac_code,
  // measurement stream to the network interface
  output logic              tx_valid,
  output logic [63:0]       tx_data
);

  freq_t last_freq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg           <= CFG_RESET;
      pll_cmd_valid <= 1'b0;
      pll_cmd_sel   <= '0;
      pll_cmd_frame <= '0;
    end else begin
      pll_cmd_valid <= 1'b0;
      if (wr_en) begin
        unique case (addr)
          REG_NCO_FTW:    cfg.nco_ftw           <= wdata;
          REG_IQ_ALPHA:   cfg.iq_alpha          <= wdata[ALPHA_W:0];
          REG_PERIOD:     cfg.meas_period       <= wdata;
          REG_F_ALPHA:    cfg.f_alpha           <= wdata[ALPHA_W:0];
          REG_OFFSET_LO:  cfg.f_offset[31:0]    <= wdata;
          REG_OFFSET_HI:  cfg.f_offset[47:32]   <= wdata[15:0];
          REG_KP:         cfg.kp                <= wdata[GAIN_W-1:0];
          REG_KI:         cfg.ki                <= wdata[GAIN_W-1:0];
          REG_KD:         cfg.kd                <= wdata[GAIN_W-1:0];
          REG_GAIN_SHIFT: cfg.gain_shift        <= wdata[5:0];
          REG_ILIM_LO:    cfg.integ_limit[31:0] <= wdata;
          REG_ILIM_HI:    cfg.integ_limit[62:32] <= wdata[30:0];
          REG_CONTROL:    cfg.pid_enable        <= wdata[0];
          REG_DAC_BIAS:   cfg.dac_bias          <= wdata[DAC_W-1:0];
          REG_DAC_DIV:    cfg.dac_div           <= wdata[15:0];
          REG_LOCK_TH_LO: cfg.lock_thresh[31:0] <= wdata;
          REG_LOCK_TH_HI: cfg.lock_thresh[46:32] <= wdata[14:0];
          REG_LOCK_HOLD:  cfg.lock_hold         <= wdata[15:0];
          REG_PLL_CMD: begin
            pll_cmd_valid <= 1'b1;
            pll_cmd_sel   <= wdata[25:24];
            pll_cmd_frame <= wdata[SPI_W-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata    <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        unique case (addr)
          REG_ID:         rdata <= ID_VALUE;
          REG_NCO_FTW:    rdata <= cfg.nco_ftw;
          REG_IQ_ALPHA:   rdata <= 32'(cfg.iq_alpha);
          REG_PERIOD:     rdata <= cfg.meas_period;
          REG_F_ALPHA:    rdata <= 32'(cfg.f_alpha);
          REG_OFFSET_LO:  rdata <= cfg.f_offset[31:0];
          REG_OFFSET_HI:  rdata <= 32'(cfg.f_offset[47:32]);
          REG_KP:         rdata <= 32'(cfg.kp);
          REG_KI:         rdata <= 32'(cfg.ki);
          REG_KD:         rdata <= 32'(cfg.kd);
          REG_GAIN_SHIFT: rdata <= 32'(cfg.gain_shift);
          REG_ILIM_LO:    rdata <= cfg.integ_limit[31:0];
          REG_ILIM_HI:    rdata <= 32'(cfg.integ_limit[62:32]);
          REG_CONTROL:    rdata <= 32'(cfg.pid_enable);
          REG_DAC_BIAS:   rdata <= 32'(cfg.dac_bias);
          REG_DAC_DIV:    rdata <= 32'(cfg.dac_div);
          REG_LOCK_TH_LO: rdata <= cfg.lock_thresh[31:0];
          REG_LOCK_TH_HI: rdata <= 32'(cfg.lock_thresh[46:32]);
          REG_LOCK_HOLD:  rdata <= 32'(cfg.lock_hold);
          REG_STATUS:     rdata <= {30'd0, pll_busy, locked};
          REG_FREQ_LO:    rdata <= last_freq[31:0];
          REG_FREQ_HI:    rdata <= 32'(signed'(last_freq[47:32]));
          REG_DAC_CODE:   rdata <= 32'(dac_code);
          default:        rdata <= '0;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_freq <= '0;
      tx_valid  <= 1'b0;
      tx_data   <= '0;
    end else begin
      tx_valid <= freq_valid;
      if (freq_valid) begin
        last_freq <= freq;
        tx_data   <= {15'd0, locked, freq};
      end
    end
  end

  // Bus rule: a cycle is either a read or a write.
  a_rd_wr_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && rd_en));

endmodule
