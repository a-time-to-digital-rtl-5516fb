`timescale 1ps/1ps
// marty_pkg: constants and types shared by the blocks of the two-channel
// FPGA time-to-digital converter with steady (event-driven) calibration.
//
// The numbers that come from the published design: a 412.5 MHz sample clock
// (period ~2424 ps), a 48-bit coarse counter, a delay line of 36 CARRY4
// elements (144 taps), and a calibration window of 2^17 = 131072 events.
// The 64-bit tag layout (8-bit channel, 48-bit coarse, 8-bit fine) is this
// design's own choice: 64 bits per event over a 1 Gbit/s link gives about
// 15.6 Mevents/s, in line with the ~16.7 Mevents/s raw limit of the link.
package marty_pkg;

  localparam int unsigned COARSE_W      = 48;   // coarse counter width
  localparam int unsigned N_CARRY4      = 36;   // CARRY4 elements per delay line
  localparam int unsigned TAPS_PER_C4   = 4;    // fast-carry taps per CARRY4
  localparam int unsigned N_TAPS        = N_CARRY4 * TAPS_PER_C4;  // 144
  localparam int unsigned FINE_W        = 8;    // ceil(log2(N_TAPS+1))
  localparam int unsigned CHAN_W        = 8;    // channel field of a tag
  localparam int unsigned LOG2_N_EVENTS = 17;   // 131072-event calibration window
  localparam int unsigned CLK_PERIOD_PS = 2424; // 1 / 412.5 MHz, rounded
  localparam int unsigned TAG_W         = CHAN_W + COARSE_W + FINE_W; // 64

  // Raw (uncalibrated) time tag as written to the tag buffer.
  typedef struct packed {
    logic [CHAN_W-1:0]   chan;    // input channel number
    logic [COARSE_W-1:0] coarse;  // sample-clock cycle of the hit
    logic [FINE_W-1:0]   fine;    // ones in the delay-line snapshot (bin index)
  } tag_t;

  // Calibration engine state.
  typedef enum logic {
    CAL_STATIC = 1'b0,  // filling the window: static code-density test
    CAL_STEADY = 1'b1   // window full: slide it by one event per hit
  } cal_state_e;

endpackage
