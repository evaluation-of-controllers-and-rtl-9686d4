// h2rg_pkg: constants and types shared by the H2RG controller modules.
//
// The array size (2048 x 2048 pixels with a 4-pixel reference border), the
// 12-bit bias DAC input and the 10-bit ADC follow the prototype controller
// and the H2RG description. The timing constants are this design's own:
// a 10 MHz system clock is assumed, which gives the 100 kHz pixel rate of the
// H2RG's normal readout with 100 system clocks per pixel.
package h2rg_pkg;

  // Detector geometry (the outer 4 rows and columns are reference pixels).
  localparam int unsigned H2RG_COLS = 2048;
  localparam int unsigned H2RG_ROWS = 2048;

  // Converter widths.
  localparam int unsigned DAC_BITS  = 12;     // bias DAC input word
  localparam int unsigned ADC_BITS  = 10;     // ADC result
  localparam int unsigned PIX_WORD  = 16;     // pixel word sent to the host

  // Assumed system clock and the resulting pixel period.
  localparam int unsigned SYS_CLK_HZ = 10_000_000;
  localparam int unsigned PIX_RATE_HZ = 100_000;
  localparam int unsigned PIX_DIV    = SYS_CLK_HZ / PIX_RATE_HZ;  // 100

  // Number of bias/power DACs and ROIC registers written at start-up.
  localparam int unsigned N_DAC      = 8;
  localparam int unsigned N_ROIC_REG = 2;
  localparam int unsigned ROIC_WORD  = 16;

  // Sequencer states.
  typedef enum logic [2:0] {
    SEQ_RESET     = 3'd0,   // clocks held inactive
    SEQ_DAC_START = 3'd1,
    SEQ_DAC_WAIT  = 3'd2,
    SEQ_REG_START = 3'd3,
    SEQ_REG_WAIT  = 3'd4,
    SEQ_READY     = 3'd5,   // waiting for a frame request
    SEQ_FRAME     = 3'd6    // frame clocking in progress
  } seq_state_t;

endpackage
