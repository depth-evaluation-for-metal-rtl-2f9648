// ect_pkg: shared constants and types of the eddy-current instrument logic.
//
// The instrument drives a transmitting coil with one or more sine tones,
// samples the receiving coil with a 14-bit ADC and reports, for every tone,
// the in-phase and quadrature (I/Q) components of the received signal at a
// fixed output rate. The converter resolution (14 bits) and the 2,500 Sa/s
// output rate follow the published instrument; the clock and sample rates,
// the number of tones and all word widths are this design's own choices.
package ect_pkg;
  // Timing (assumed: 100 MHz fabric clock, 1 MSa/s converters)
  localparam int unsigned CLK_HZ      = 100_000_000;
  localparam int unsigned FS_HZ       = 1_000_000;
  localparam int unsigned CLK_DIV     = CLK_HZ / FS_HZ;     // clocks per sample
  localparam int unsigned OUT_RATE_HZ = 2500;               // I/Q output rate
  localparam int unsigned DECIM       = FS_HZ / OUT_RATE_HZ;// samples per I/Q output

  // Converters
  localparam int unsigned ADC_W = 14;
  localparam int unsigned DAC_W = 14;

  // Synthesiser
  localparam int unsigned NUM_TONES = 4;
  localparam int unsigned PHASE_W   = 32;
  localparam int unsigned LUT_AW    = 10;
  localparam int unsigned SIN_W     = 16;
  localparam int unsigned AMP_W     = 16;

  // Demodulator
  localparam int unsigned ACC_W = 40;
  localparam int unsigned OUT_W = 32;

  // Front-end gain code
  localparam int unsigned GAIN_W = 8;

  // Data frames: one header word, then I and Q of each tone
  localparam int unsigned FRAME_WORDS = 1 + 2 * NUM_TONES;
  localparam logic [7:0]  FRAME_SYNC  = 8'hEC;

  // Frequency word for the 20 kHz excitation: round(20e3 * 2^32 / FS_HZ)
  localparam logic [PHASE_W-1:0] FREQ_20KHZ = 32'd85899346;

  // Register map (byte addresses of the AXI4-Lite slave)
  localparam logic [7:0] REG_CTRL        = 8'h00;
  localparam logic [7:0] REG_STATUS      = 8'h04;
  localparam logic [7:0] REG_GAIN        = 8'h08;
  localparam logic [7:0] REG_OVR_THRESH  = 8'h0C;
  localparam logic [7:0] REG_FRAME_COUNT = 8'h10;
  localparam logic [7:0] REG_DROP_COUNT  = 8'h14;
  localparam logic [7:0] REG_OVR_COUNT   = 8'h18;
  localparam logic [7:0] REG_TONE_BASE   = 8'h20; // FREQ[k] at +8k, AMP[k] at +8k+4

  // Configuration written by software
  typedef struct packed {
    logic                                run;
    logic                                clear;      // one-cycle pulse
    logic [GAIN_W-1:0]                   gain;
    logic [ADC_W-2:0]                    ovr_thresh; // magnitude threshold
    logic [NUM_TONES-1:0][PHASE_W-1:0]   freq;
    logic [NUM_TONES-1:0][AMP_W-1:0]     amp;
  } ect_cfg_t;

  // Status read by software
  typedef struct packed {
    logic        ovr_flag;
    logic        exc_sat;
    logic [31:0] frame_count;
    logic [15:0] drop_count;
    logic [15:0] ovr_count;
    logic [15:0] fifo_level;   // words waiting in the DMA FIFO
  } ect_status_t;
endpackage
