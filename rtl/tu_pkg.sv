// Types and constants shared by the Trigger Unit modules.
//
// The Trigger Unit works on 8-bit words: every word-clock cycle carries eight
// consecutive RF periods of the Sync input and of the Out output. Bit 0 of a
// word is the earliest RF period in time, bit 7 the latest (the bit order is a
// choice of this design). All counts (B, HT, W, pulse width, pattern length)
// are given in RF periods or in pulses.
//
// The six operating modes and the sequencer state names follow the paper's
// description; the encodings and the register widths are choices of this design.
package tu_pkg;

  // Bits per word on the parallel side of the serializer and deserializer.
  localparam int unsigned WORD_W = 8;
  // Width of the B, HT, W and pulse-width counters (RF periods).
  localparam int unsigned CNT_W  = 32;

  typedef enum logic [2:0] {
    MODE_SINGLE    = 3'd0,  // one pulse B RF periods after Sync
    MODE_INFINITE  = 3'd1,  // first pulse at B, then every HT, until Stop
    MODE_WINDOWED  = 3'd2,  // as MODE_INFINITE but W pulses in all
    MODE_SYNCLESS  = 3'd3,  // pulse train every HT started by Start, no Sync
    MODE_LOWFREQ   = 3'd4,  // square wave, HT periods high and HT (+1) low
    MODE_PLAY      = 3'd5   // pattern memory played out from B after Sync
  } tu_mode_e;

  // Sequencer states. The first four are the states of the paper's chronogram;
  // ST_PLAY is the state in which the pattern memory streams out.
  typedef enum logic [2:0] {
    ST_IDLE      = 3'd0,
    ST_WAIT_SYNC = 3'd1,
    ST_B_COUNT   = 3'd2,
    ST_HT_COUNT  = 3'd3,
    ST_PLAY      = 3'd4
  } tu_state_e;

  // Run-time configuration, written by the host while the unit is idle.
  typedef struct packed {
    tu_mode_e           mode;
    logic [CNT_W-1:0]   b;           // RF periods from Sync (or Start) to the first event
    logic [CNT_W-1:0]   ht;          // RF periods between pulses / half period, >= 8
    logic [CNT_W-1:0]   w;           // number of pulses in MODE_WINDOWED, >= 1
    logic [CNT_W-1:0]   pw;          // Out pulse width in RF periods, 1 .. HT-1
    logic               unbalanced;  // MODE_LOWFREQ: one more RF period low
    logic [CNT_W-1:0]   play_len;    // MODE_PLAY pattern length in bits, >= 8
  } tu_cfg_t;

endpackage
