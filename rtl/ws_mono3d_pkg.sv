// ws_mono3d_pkg: sizes and shared types of the WS-Mono3D accelerator.
//
// The accelerator is a weight-stationary (WS) 256x256 systolic array of 8-bit integer
// MAC units, stacked monolithically under one tier holding a 2 MB IFMAP SRAM and a 2 MB
// OFMAP SRAM and four tiers of filter RRAM (32 MB). The constants below are the paper's
// configuration and are used as the parameter defaults of the modules:
//   * 256x256 PE array, 8-bit integer MAC                          (paper)
//   * each SRAM: 2 MB, 16 banks, 16-byte words -> 8192 words/bank   (paper)
//   * RRAM: 4 tiers x 64 banks, 128 KB per bank, 256-byte words,
//     so 512 words and 9 address bits per bank                     (paper)
//   * 24-bit accumulators (2*8 product bits + log2(256) rows, so a
//     full column sum cannot overflow)                              (own choice)
//   * 5-bit output shift for requantising psums to 8 bits            (own choice)
package ws_mono3d_pkg;

  localparam int unsigned PE_ROWS             = 256;
  localparam int unsigned PE_COLS             = 256;
  localparam int unsigned DATA_W              = 8;
  localparam int unsigned ACC_W               = 2 * DATA_W + $clog2(PE_ROWS);

  localparam int unsigned SRAM_BANKS          = 16;
  localparam int unsigned SRAM_WORD_BYTES     = 16;
  localparam int unsigned SRAM_BANK_WORDS     = 8192;

  localparam int unsigned RRAM_TIERS          = 4;
  localparam int unsigned RRAM_BANKS_PER_TIER = 64;
  localparam int unsigned RRAM_WORD_BYTES     = 256;
  localparam int unsigned RRAM_BANK_WORDS     = 512;

  localparam int unsigned SHIFT_W             = 5;

  // Fold sequencer states. A fold is one weight tile resident in the array.
  typedef enum logic [1:0] {
    S_IDLE,     // waiting for a fold command
    S_PRELOAD,  // all weights enter the array in this one cycle
    S_STREAM,   // one IFMAP vector per cycle is read and multicast
    S_DRAIN     // psums of the last vectors travel down the columns
  } ctrl_state_e;

  // Tag that travels with each IFMAP vector down to the bottom edge of the array.
  typedef struct packed {
    logic valid;  // a real vector (not a bubble)
    logic first;  // first vector of its fold: load the fold's OFMAP base address
  } out_tag_t;

endpackage
