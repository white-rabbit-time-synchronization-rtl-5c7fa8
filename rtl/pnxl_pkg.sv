// pnxl_pkg: constants and types shared by the Pixie-Net XL pulse-processing
// FPGA design.
//
// Channel count and ADC width follow the DB01 daughter card (four channels,
// 14-bit ADC, up to 125 MSPS), which the design treats as its main
// configuration. The event record layout is this design's own choice, sized so
// that one event (8-word header plus a 122-sample, about 1 us, waveform) is 276
// bytes, the event size quoted for the throughput measurements.
//
// Record layout (32-bit words, little index first):
//   w0  {HDR_WORDS[3:0], channel[3:0], module_id[7:0], record length in words[15:0]}
//   w1  local time stamp [31:0]   (processing clock, 8 ns at 125 MHz)
//   w2  {local time stamp [47:32], energy[15:0]}
//   w3  White Rabbit date/time word, 16 ns granularity: {tai_sec[4:0], cycles[27:1]}
//   w4  {cfd fraction[15:0], cfd sample offset[7:0], flags[7:0]}
//   w5..w7  short sums 0..2 (pulse shape analysis)
//   w8..    waveform, two 16-bit samples per word, earlier sample in bits [15:0]
package pnxl_pkg;

  localparam int NCH       = 4;    // channels per FPGA (DB01)
  localparam int ADC_W     = 14;   // ADC resolution (DB01)
  localparam int TRACE_LEN = 122;  // waveform samples per event (~1 us at 125 MSPS)
  localparam int HDR_WORDS = 8;    // header words per record
  localparam int REC_WORDS = HDR_WORDS + TRACE_LEN / 2;  // 69 words = 276 bytes

  // Limits of the programmable filter parameters (register field widths).
  localparam int FL_MAX = 31;   // fast filter rise time, samples
  localparam int FG_MAX = 31;   // fast filter gap, samples
  localparam int SL_MAX = 127;  // energy filter rise time, samples
  localparam int SG_MAX = 63;   // energy filter gap (flat top), samples
  localparam int PSA_LEN_MAX = 31;  // short sum length, samples
  localparam int PSA_CAP = 64;      // short sums are latched PSA_CAP samples after the trigger
  localparam int CFD_PRE = 16;      // CFD search starts CFD_PRE samples before the trigger
  localparam int CFD_WIN = 48;      // CFD search window, samples

  localparam int COEF_W = 32;   // energy coefficient width, signed Q1.30
  localparam int COEF_FRAC = 30;

  // White Rabbit time as delivered by the WR core: 40 bits of TAI seconds and
  // 28 bits of 8 ns cycles within the second (68 bits in all).
  typedef struct packed {
    logic [39:0] tai_sec;
    logic [27:0] cycles;
  } wr_time_t;

  // Per-channel processing parameters, written through the controller bus.
  typedef struct packed {
    logic               enable;
    logic [4:0]         fast_len;     // fast trapezoid rise time, 1..FL_MAX
    logic [4:0]         fast_gap;     // fast trapezoid gap, 0..FG_MAX
    logic [15:0]        threshold;    // trigger threshold on the fast trapezoid
    logic [6:0]         slow_len;     // energy trapezoid rise time, 1..SL_MAX
    logic [5:0]         slow_gap;     // energy trapezoid gap, 0..SG_MAX
    logic signed [COEF_W-1:0] c0;     // coefficient of the leading sum
    logic signed [COEF_W-1:0] cg;     // coefficient of the gap sum
    logic signed [COEF_W-1:0] c1;     // coefficient of the trailing sum
    logic [15:0]        baseline;     // ADC baseline (offset) removed from the energy
    logic [2:0][7:0]    psa_start;    // short sum starts, signed samples relative to the trigger
    logic [2:0][4:0]    psa_len;      // short sum lengths, 1..PSA_LEN_MAX
    logic [3:0]         cfd_delay;    // CFD delay D, samples
    logic [7:0]         cfd_w;        // CFD fraction, w = cfd_w/256
    logic [5:0]         trace_pre;    // pre-trigger waveform samples
  } chan_cfg_t;

  // Minimal per-event information handed to the Zynq (software triggering).
  typedef struct packed {
    logic [3:0]  channel;
    logic [15:0] energy;
    logic [47:0] local_ts;
    logic [31:0] wr_word;
  } meta_t;

endpackage
