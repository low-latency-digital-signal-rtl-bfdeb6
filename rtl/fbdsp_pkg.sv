// fbdsp_pkg: widths, settings record and histogram mode encoding shared by the
// feedback signal-processing blocks.
//
// The 14-bit ADC word and the 100 MS/s, fs/4 processing scheme follow the
// published design. The internal widths below (15-bit mixer output, 16-bit
// I/Q words, 3-bit shift selector, 8-bit readout delay, 16-bit oscillator
// and coefficient words) are choices of this implementation: the source
// gives no internal word lengths. Each block uses only some of these
// constants, so a lint run of a single block reports the rest as unused.
package fbdsp_pkg;

  localparam int unsigned ADC_W   = 14;  // ADC resolution
  localparam int unsigned MIX_W   = ADC_W + 1;  // room for -(-2^13)
  localparam int unsigned IQ_W    = 16;  // moving-average and pre-processed I/Q words
  localparam int unsigned SHIFT_W = 3;   // scaling by 2^0 .. 2^7
  localparam int unsigned D_W     = 8;   // readout delay d, 0 .. 255 cycles
  localparam int unsigned LEN_W   = 5;   // moving-average length l, 1 .. 16
  localparam int unsigned BIN_W   = 7;   // histogram bin index per dimension
  localparam int unsigned TLEN_W  = 5;   // time-resolved window, 1 .. 16 cycles
  localparam int unsigned PH_W    = 16;  // oscillator phase and frequency words
  localparam int unsigned COEF_W  = 16;  // FIR coefficient word
  localparam int unsigned COEF_FRAC = 15; // FIR coefficient fraction bits
  localparam int unsigned TAP_W   = 6;   // FIR tap index, up to 64 taps

  // Histogram operating modes.
  typedef enum logic [1:0] {
    HIST_2D   = 2'd0,   // address {I~, Q~}, 14 bits
    HIST_CORR = 2'd1,   // address {I~2, Q~[6:2], I~1, seg[1:0]}, 21 bits
    HIST_TIME = 2'd2    // address {I~, Q~, t[3:0], seg[2:0]}, 21 bits
  } hist_mode_e;

  // Everything the host computer sets.
  typedef struct packed {
    logic signed [IQ_W-1:0] c_i;        // offset c_I
    logic signed [IQ_W-1:0] c_q;        // offset c_Q
    logic [SHIFT_W-1:0]     shift_i;    // m_I = 2^shift_i
    logic [SHIFT_W-1:0]     shift_q;    // m_Q = 2^shift_q
    logic [LEN_W-1:0]       ma_len;     // moving-average window l
    logic [D_W-1:0]         fb_delay;   // readout delay d
    logic [3:0]             lut1;       // L(1)_xy at bit index {x,y}
    logic [3:0]             lut2;       // L(2)_xy at bit index {x,y}
    hist_mode_e             hist_mode;
    logic                   hist_en;    // record histograms
    logic [TLEN_W-1:0]      hist_tlen;  // time-resolved window length
    logic                   mix_sel;    // 0 quarter-rate mixer, 1 oscillator mixer
    logic                   fir_sel;    // 0 moving average, 1 general FIR filter
    logic [PH_W-1:0]        nco_ftw;    // oscillator frequency word
    logic [PH_W-1:0]        nco_phase;  // oscillator phase offset
  } settings_t;

endpackage
