// lock_pkg -- shared types and constants of the digital frequency locking module.
//
// Holds the data widths used across the datapath, the configuration record that the
// control registers hand to the datapath, the register map, and the CORDIC arctangent
// table used by both the NCO (rotation mode) and the phase detector (vectoring mode).
//
// Phase convention: a phase word of PHASE_W bits is a signed fraction of a turn, so
// 2^PHASE_W is 2*pi and the representable range is [-pi, +pi).
// Frequency convention: a frequency word of FREQ_W bits is signed and counts units of
// Fs / 2^FREQ_W, with Fs the ADC sample rate (100 MS/s on the reference board, so one
// unit is about 0.36 uHz).
// The widths are this design's choice; the paper gives only the 16-bit ADC and the
// 20-bit DAC.
package lock_pkg;

  // Converter widths given by the paper (16-bit 100 MS/s ADC, 20-bit 1 MS/s DAC).
  localparam int unsigned ADC_W   = 16;
  localparam int unsigned DAC_W   = 20;

  // Internal widths (design choices).
  localparam int unsigned NCO_ACC_W = 32;  // NCO phase accumulator
  localparam int unsigned SIN_W     = 16;  // NCO sine / cosine amplitude
  localparam int unsigned MIX_W     = 24;  // mixer output and I/Q filter width
  localparam int unsigned PHASE_W   = 24;  // phase word, 2^PHASE_W = one turn
  localparam int unsigned FREQ_W    = 48;  // frequency word, unit Fs / 2^FREQ_W
  localparam int unsigned PERIOD_W  = 32;  // measurement period, in samples
  localparam int unsigned ALPHA_W   = 24;  // LPF coefficient fraction bits
  localparam int unsigned GAIN_W    = 24;  // PID gains, signed
  localparam int unsigned INTEG_W   = 64;  // PID integrator
  localparam int unsigned SPI_W     = 24;  // frame length of both serial ports

  // Arctangent table: ATAN_TAB[i] = round(atan(2^-i) / (2*pi) * 2^24), i = 0..23.
  localparam int unsigned CORDIC_MAX = 24;
  localparam logic [23:0] ATAN_TAB [CORDIC_MAX] = '{
    24'd2097152, 24'd1238021, 24'd654136, 24'd332050, 24'd166669, 24'd83416,
    24'd41718,   24'd20860,   24'd10430,  24'd5215,   24'd2608,   24'd1304,
    24'd652,     24'd326,     24'd163,    24'd81,     24'd41,     24'd20,
    24'd10,      24'd5,       24'd3,      24'd1,      24'd1,      24'd0
  };

  typedef logic signed [PHASE_W-1:0] phase_t;
  typedef logic signed [FREQ_W-1:0]  freq_t;
  typedef logic        [DAC_W-1:0]   dac_code_t;

  // Run-time configuration, written from the PC through the control registers.
  typedef struct packed {
    logic [NCO_ACC_W-1:0]      nco_ftw;       // NCO tuning word, f_NCO = ftw * Fs / 2^32
    logic [ALPHA_W:0]          iq_alpha;      // I/Q LPF coefficient, Q1.24, 2^24 = bypass
    logic [PERIOD_W-1:0]       meas_period;   // frequency measurement period, samples
    logic [ALPHA_W:0]          f_alpha;       // frequency LPF coefficient, Q1.24
    logic signed [FREQ_W-1:0]  f_offset;      // settled frequency offset (set point)
    logic signed [GAIN_W-1:0]  kp;
    logic signed [GAIN_W-1:0]  ki;
    logic signed [GAIN_W-1:0]  kd;
    logic [5:0]                gain_shift;    // PID sum is shifted right by this
    logic [INTEG_W-2:0]        integ_limit;   // integrator clamp, magnitude
    logic                      pid_enable;    // 0: free run, DAC holds dac_bias
    logic [DAC_W-1:0]          dac_bias;      // DAC code around which the PID acts
    logic [15:0]               dac_div;       // clocks between DAC updates
    logic [FREQ_W-2:0]         lock_thresh;   // lock window, magnitude
    logic [15:0]               lock_hold;     // periods inside the window to lock
  } cfg_t;

  // Register map of the control registers (32-bit words, word addresses).
  typedef enum logic [7:0] {
    REG_ID          = 8'h00,  // RO: identification
    REG_NCO_FTW     = 8'h01,
    REG_IQ_ALPHA    = 8'h02,
    REG_PERIOD      = 8'h03,
    REG_F_ALPHA     = 8'h04,
    REG_OFFSET_LO   = 8'h05,
    REG_OFFSET_HI   = 8'h06,  // bits 15:0 = offset[47:32]
    REG_KP          = 8'h07,
    REG_KI          = 8'h08,
    REG_KD          = 8'h09,
    REG_GAIN_SHIFT  = 8'h0A,
    REG_ILIM_LO     = 8'h0B,
    REG_ILIM_HI     = 8'h0C,  // bits 30:0 = integ_limit[62:32]
    REG_CONTROL     = 8'h0D,  // bit 0 = pid_enable
    REG_DAC_BIAS    = 8'h0E,
    REG_DAC_DIV     = 8'h0F,
    REG_LOCK_TH_LO  = 8'h10,
    REG_LOCK_TH_HI  = 8'h11,  // bits 14:0 = lock_thresh[46:32]
    REG_LOCK_HOLD   = 8'h12,
    REG_PLL_CMD     = 8'h13,  // WO: [25:24] chip select, [23:0] frame; write starts it
    REG_STATUS      = 8'h14,  // RO: bit 0 locked, bit 1 PLL port busy
    REG_FREQ_LO     = 8'h15,  // RO: last measured frequency [31:0]
    REG_FREQ_HI     = 8'h16,  // RO: last measured frequency [47:32], sign extended
    REG_DAC_CODE    = 8'h17   // RO: last DAC code
  } reg_addr_e;

  localparam logic [31:0] ID_VALUE = 32'h444C_4D01;  // "DLM" v1

  // Reset configuration: loop open, 1000-sample (100 kHz) measurement period.
  localparam cfg_t CFG_RESET = '{
    nco_ftw:     32'd0,
    iq_alpha:    25'd524288,         // 1/32
    meas_period: 32'd1000,
    f_alpha:     25'd16777216,       // 1.0, bypass
    f_offset:    '0,
    kp:          '0,
    ki:          '0,
    kd:          '0,
    gain_shift:  6'd0,
    integ_limit: '1,
    pid_enable:  1'b0,
    dac_bias:    20'h80000,
    dac_div:     16'd100,            // 1 MS/s at a 100 MHz clock
    lock_thresh: '0,
    lock_hold:   16'd10
  };

endpackage
