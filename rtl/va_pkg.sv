// va_pkg: constants and types shared by the 64-channel front-end ASIC model.
//
// The channel count (64) and the 4-bit per-channel threshold trim come from the
// chip description. The layout of the slow-control configuration word, the
// reset values and the 100 MHz sampling clock of the digital section are this
// design's own choices; they are described next to each type below.
package va_pkg;

  // 64 parallel inputs and 64 parallel outputs.
  localparam int unsigned N_CH      = 64;
  // Per-channel threshold trim DAC width.
  localparam int unsigned TRIM_BITS = 4;

  // Three modes of operation. INIT while the bit pattern is being shifted in,
  // CALIB when only channels selected for calibration respond, NORMAL when
  // every channel that is not masked responds.
  typedef enum logic [1:0] {
    MODE_INIT   = 2'd0,
    MODE_CALIB  = 2'd1,
    MODE_NORMAL = 2'd2
  } mode_e;

  // Per-channel configuration, 6 bits. Packed MSB first as written here.
  typedef struct packed {
    logic [TRIM_BITS-1:0] trim;     // trim DAC code, 8 = no offset
    logic                 disable_ch; // 1: digital output masked
    logic                 cal_sel;  // 1: channel takes part in calibration mode
  } ch_cfg_t;

  // Chip-wide configuration bits.
  typedef struct packed {
    logic cal_mode;   // 1: calibration mode, 0: normal mode
    logic neg_thr;    // polarity select of the discriminator mux
    logic test_on2;   // enables the channels' contribution to the fast-OR
  } glob_cfg_t;

  // Whole configuration word as held by the shift register. The global bits
  // sit at the top, so they are the first bits shifted in; channel 63 follows,
  // channel 0 is shifted in last.
  typedef struct packed {
    glob_cfg_t           glob;
    ch_cfg_t [N_CH-1:0]  ch;
  } cfg_t;

  localparam int unsigned CFG_BITS = $bits(cfg_t);   // 3 + 64*6 = 387

endpackage
