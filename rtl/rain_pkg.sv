// rain_pkg: constants and types shared by the RAIN4HPGe digitizer firmware.
//
// The board digitizes eight "slow" channels (14-bit, 100 MSPS, shaping
// amplifiers) and four "fast" channels (12-bit, 1 GSPS, timing amplifiers).
// All firmware runs on one 100 MHz clock, the slow sample rate, so a fast
// channel delivers ten samples per clock. Every sample is carried in a 16-bit
// slot (zero-extended). Events travel as a stream of 64-bit words, four
// samples per word; the DDR3 user interface moves 512-bit beats, eight words
// per beat. Channel counts, resolutions, rates and record lengths (120 us slow,
// 16 us fast) follow the paper; the clocking, slot width and word format are
// this design's choices.
package rain_pkg;

  localparam int unsigned CLK_HZ       = 100_000_000;
  localparam int unsigned N_SLOW       = 8;
  localparam int unsigned N_FAST       = 4;
  localparam int unsigned N_CH         = N_SLOW + N_FAST;
  localparam int unsigned SLOW_BITS    = 14;
  localparam int unsigned FAST_BITS    = 12;
  localparam int unsigned FAST_SPC     = 10;        // fast samples per clock
  localparam int unsigned SLOT_W       = 16;        // bits per stored sample
  localparam int unsigned WORD_W       = 64;        // event stream word
  localparam int unsigned APP_DATA_W   = 512;       // DDR3 user-interface beat
  localparam int unsigned APP_ADDR_W   = 27;        // 1 GB in 8-byte units
  localparam int unsigned WORDS_PER_BEAT = APP_DATA_W / WORD_W;
  localparam int unsigned ADDR_PER_BEAT  = APP_DATA_W / 64; // BL8 on a 64-bit bus

  // Record lengths in samples: 120 us at 100 MSPS and 16 us at 1 GSPS.
  localparam int unsigned SLOW_RECORD  = 12_000;
  localparam int unsigned FAST_RECORD  = 16_000;

  // Trigger timing at CLK_HZ.
  localparam int unsigned VETO_CYCLES   = 1_000_000;      // 10 ms
  localparam int unsigned RANDOM_PERIOD = 2_000_000_000;  // 0.05 Hz

  localparam int unsigned TS_W = 64;

  // User-interface commands of the DDR3 memory controller.
  typedef enum logic [2:0] {
    APP_CMD_WRITE = 3'b000,
    APP_CMD_READ  = 3'b001
  } app_cmd_e;

  // Trigger source flags carried in every event header.
  typedef struct packed {
    logic random;         // periodic noise-monitor trigger
    logic over_threshold; // over-threshold trigger passed the inhibit veto
  } trig_src_t;

  // Magic numbers of the event format.
  localparam logic [15:0] EVT_MAGIC  = 16'hCDE0;
  localparam logic [15:0] CH_MAGIC   = 16'hC4A0;
  localparam logic [63:0] FILL_WORD  = 64'hFFFF_FFFF_FFFF_FFFF;

endpackage
