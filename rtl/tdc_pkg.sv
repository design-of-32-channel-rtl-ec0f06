// tdc_pkg: widths, record layouts and the register map shared by the
// 32-channel shifted-clock-sampling TDC.
//
// Time measurement: a 16-bit coarse count of the 200 MHz clock (5 ns) and a
// 4-bit fine count of the 16 sampling phases (312.5 ps) form a 20-bit time
// stamp; 2^16 x 5 ns = 327.68 us of range. A stop channel stores the time of
// its hit relative to the latest start. The stored record is 54 bits:
// 20-bit time, 26-bit time tag (seconds) and 8-bit trigger count. After a
// 7-bit channel number is attached it is packed into one 64-bit word.
// All widths are the ones the design is specified with; the order of the
// fields inside the 64-bit word, the 3-bit marker in its top bits and the
// register addresses are this design's own choices.
package tdc_pkg;

  localparam int unsigned NUM_CLK  = 8;    // shifted 200 MHz clocks
  localparam int unsigned N_PH     = 16;   // sampling phases (rising + falling)
  localparam int unsigned FINE_W   = 4;
  localparam int unsigned COARSE_W = 16;
  localparam int unsigned TIME_W   = COARSE_W + FINE_W;  // 20
  localparam int unsigned TAG_W    = 26;
  localparam int unsigned TRIG_W   = 8;
  localparam int unsigned CHID_W   = 7;    // 128-channel spectrometer
  localparam int unsigned REC_W    = TIME_W + TAG_W + TRIG_W;  // 54
  localparam int unsigned WORD_W   = 64;

  typedef logic [TIME_W-1:0] time_t;

  // Hit-buffer entry: the start-to-start epoch the hit belongs to, and its time.
  typedef struct packed {
    logic  epoch;
    time_t tm;
  } hit_t;

  // Per-channel record, as stored in the readout FIFO (54 bits).
  typedef struct packed {
    logic [TRIG_W-1:0] trig;
    logic [TAG_W-1:0]  tag;
    time_t             tm;
  } rec_t;

  // 64-bit output word.
  localparam logic [2:0] WORD_MARK = 3'b101;
  typedef struct packed {
    logic [2:0]        mark;
    logic [CHID_W-1:0] ch;
    rec_t              rec;
  } word_t;

  // Register addresses (32-bit registers).
  localparam logic [7:0] REG_CTRL     = 8'h00; // [0] self-trigger, [1] self-check, [2] soft error/reset
  localparam logic [7:0] REG_SHIELD   = 8'h01; // 1 = channel shielded (ignored)
  localparam logic [7:0] REG_WIN_LO   = 8'h02; // time window low bound (20 bits, inclusive)
  localparam logic [7:0] REG_WIN_HI   = 8'h03; // time window high bound (20 bits, inclusive)
  localparam logic [7:0] REG_SC_PER   = 8'h04; // self-check pulse period in 5 ns cycles
  localparam logic [7:0] REG_CH_BASE  = 8'h05; // channel number of Stop[1]
  localparam logic [7:0] REG_ERR_CNT  = 8'h06; // read-only: number of error resets
  localparam logic [7:0] REG_DAC_BASE = 8'h20; // 0x20..0x3F: DAC threshold of Stop[1..32]

endpackage
