// dfmux_pkg: widths, register map and shared types of the digital frequency
// domain multiplexer (DfMUX) firmware.
//
// The widths that are numbers of the design itself (32-bit phase words, a
// 16-bit sine table address and word, 16-bit amplitude registers, the 16-bit
// D/A, the 14-bit A/D, the 18-bit filter datapath and the 32-bit FIFO word)
// follow the published description. The register map and the host bus are
// choices of this implementation.
package dfmux_pkg;

  localparam int PHASE_W  = 32;  // DDS and mixer phase accumulators
  localparam int LUT_AW   = 16;  // phase truncated to 16 bits -> table address
  localparam int LUT_DW   = 16;  // sine table word
  localparam int AMP_W    = 16;  // carrier amplitude register
  localparam int DAC_W    = 16;  // D/A word
  localparam int ADC_W    = 14;  // A/D word
  localparam int FILT_W   = 18;  // CIC output after convergent truncation, FIR input
  localparam int WORD_W   = 32;  // FIR output / FIFO word
  localparam int N_FIR    = 6;   // FIR #1 .. FIR #6
  localparam int GAIN_W   = 2;   // four selectable gain settings

  // Per-module register map (word addresses, 8-bit offset inside a module).
  localparam logic [7:0] RA_CAR_FREQ  = 8'h00;  // + channel, 32 words
  localparam logic [7:0] RA_CAR_PHASE = 8'h20;
  localparam logic [7:0] RA_CAR_AMP   = 8'h40;
  localparam logic [7:0] RA_NUL_FREQ  = 8'h60;
  localparam logic [7:0] RA_NUL_PHASE = 8'h80;
  localparam logic [7:0] RA_NUL_AMP   = 8'hA0;
  localparam logic [7:0] RA_DEM_PHASE = 8'hC0;
  localparam logic [7:0] RA_CTRL      = 8'hE0;  // [8:6] rate select, [5:4] carrier gain, [3:2] nuller gain, [1:0] A/D gain
  localparam logic [7:0] RA_CHAN_EN   = 8'hE1;  // mixer enable, one bit per channel
  localparam logic [7:0] RA_FIFO_DATA = 8'hE2;  // read pops one word
  localparam logic [7:0] RA_FIFO_STAT = 8'hE3;  // [15:0] count, [16] overflow (write 1 clears), [17] filter overrun

  // Board-level registers (host address bit 10 set).
  localparam logic [7:0] RA_BRD_SYNC  = 8'h00;  // write: restart every phase accumulator at the next sample
  localparam logic [7:0] RA_BRD_KICK  = 8'h01;  // write: processor alive (watchdog)
  localparam logic [7:0] RA_BRD_ID    = 8'h02;  // read: number of modules and channels

  typedef struct packed {
    logic [2:0]        rate_sel;   // 0 -> FIR #1 output .. 5 -> FIR #6 output
    logic [GAIN_W-1:0] car_gain;
    logic [GAIN_W-1:0] nul_gain;
    logic [GAIN_W-1:0] adc_gain;
  } ctrl_t;

endpackage
