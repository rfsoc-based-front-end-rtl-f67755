// Shared types and constants of the pulse-detection front end.
//
// All of the programmable logic runs on the 125 MHz RF-ADC stream clock.
// An h-gain stream word carries 8 consecutive 1 GS/s samples of 16 bits
// (sample 0, the earliest, in bits 15:0). Frames leave each channel as
// 128-bit words and are narrowed to 64 bits before the round-robin merge.
// The frame layout (header, samples, footer) is this design's own choice;
// it is sized so that an 80 ns event occupies 184 bytes.
package fe_pkg;
  localparam int unsigned SAMPLE_W   = 16;   // bits per sample on the stream
  localparam int unsigned TS_W       = 64;   // timestamp width
  localparam int unsigned PRE_W      = 6;    // pre-trigger time field
  localparam int unsigned POST_W     = 16;   // post-trigger time field

  localparam logic [7:0] HDR_MAGIC = 8'hA5;
  localparam logic [7:0] FTR_MAGIC = 8'h5A;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Run-time configuration written by the processing system
  typedef struct packed {
    logic              blr_en;
    logic              ma_en;
    logic [2:0]        trig_mode;   // enable mask {forced, external, event}
    logic [PRE_W-1:0]  pre;         // pre-trigger cycles
    logic [POST_W-1:0] post;        // post-trigger cycles
  } fe_cfg_t;

  // 128-bit frame header: {magic, channel, words, seq_no, dropped, timestamp}
  typedef struct packed {
    logic [7:0]      magic;
    logic [7:0]      channel;
    logic [15:0]     words;
    logic [15:0]     seq_no;
    logic [15:0]     dropped;
    logic [TS_W-1:0] timestamp;
  } frame_hdr_t;

  // 64-bit frame footer: {magic, channel, l-gain minimum, l-gain maximum, words}
  typedef struct packed {
    logic [7:0]  magic;
    logic [7:0]  channel;
    logic [15:0] lg_min;
    logic [15:0] lg_max;
    logic [15:0] words;
  } frame_ftr_t;
endpackage
