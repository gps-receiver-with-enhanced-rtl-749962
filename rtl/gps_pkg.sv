// gps_pkg: constants and types shared by the instant-on GPS timing blocks.
//
// The GPS L1 C/A navigation message runs at 50 bit/s: a bit lasts 20 ms
// (20 code periods of 1 ms), a word is 30 bits (600 ms), a sub-frame is
// 10 words (6 s) and TOW counts sub-frames in 6 s units. The receiver keeps
// a TIC every 100 ms. The real-time clock used across power-off intervals
// counts at 32 kHz, i.e. 32 counts per millisecond, so an RTC difference is
// a millisecond value with 5 fractional bits. These numbers follow the
// paper; widths (TOW 17 bits, week 16 bits, Doppler 16 bits signed) are this
// design's choice.
package gps_pkg;

  localparam int unsigned BITS_PER_WORD      = 30;
  localparam int unsigned WORDS_PER_SUBFRAME = 10;
  localparam int unsigned MS_PER_BIT         = 20;
  localparam int unsigned MS_PER_WORD        = MS_PER_BIT * BITS_PER_WORD;        // 600
  localparam int unsigned MS_PER_SUBFRAME    = MS_PER_WORD * WORDS_PER_SUBFRAME;  // 6000
  localparam int unsigned BITS_PER_SUBFRAME  = BITS_PER_WORD * WORDS_PER_SUBFRAME; // 300
  localparam int unsigned TIC_MS             = 100;
  localparam int unsigned TICS_PER_WORD      = MS_PER_WORD / TIC_MS;              // 6
  localparam int unsigned CHIPS_PER_MS       = 1023;
  localparam int unsigned CHIPS_PER_BIT      = CHIPS_PER_MS * MS_PER_BIT;         // 20460
  localparam int unsigned RTC_COUNTS_PER_MS  = 32;   // 32 kHz RTC, paper's divide-by-32
  localparam int unsigned RTC_FRAC_BITS      = 5;    // log2(32)
  localparam longint     MS_PER_WEEK         = 604800000;
  localparam longint     L1_HZ               = 1575420000;
  localparam int unsigned PROP_DELAY_INIT_MS = 75;   // assumed first propagation delay, Eq. (3)

  localparam int unsigned RTC_W  = 32;
  localparam int unsigned TOW_W  = 17;
  localparam int unsigned WEEK_W = 16;
  localparam int unsigned TIC_W  = 32;
  localparam int unsigned DOP_W  = 16;
  localparam int unsigned CT_W   = 23;   // chips in one sub-frame: 6 138 000 < 2^23
  localparam int unsigned MS_W   = 48;   // signed millisecond quantities

  typedef logic [3:0]        word_idx_t;
  typedef logic [4:0]        bit_idx_t;
  typedef logic [TOW_W-1:0]  tow_t;
  typedef logic [RTC_W-1:0]  rtc_t;
  typedef logic [TIC_W-1:0]  tic_t;
  typedef logic [WEEK_W-1:0] week_t;
  typedef logic signed [DOP_W-1:0] doppler_t;
  typedef logic signed [MS_W-1:0]  ms_t;

  // Position in the navigation message of the bit that starts at a bit edge.
  typedef struct packed {
    word_idx_t word_idx;
    bit_idx_t  bit_idx;
    tow_t      tow;       // TOW of the sub-frame being received (GPS time at its end / 6 s)
  } nav_pos_t;

  // State kept across power-off for one channel (Fig. 2 "Data load").
  typedef struct packed {
    logic     valid;
    nav_pos_t pos;
    rtc_t     rtc;        // RTC count at the bit edge where pos was taken
    doppler_t doppler;    // carrier Doppler (Hz) at that time
  } saved_state_t;

endpackage
