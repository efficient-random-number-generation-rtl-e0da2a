// qrng_pkg -- constants shared by the SPAD-array random number generator.
//
// The numbers that come from the LinoSPAD description are the 400 MHz
// sampling clock, the 35 x 4 = 140-tap delay line (fine code 0..139), the
// 2^28-bin tag range, the 512-tag per-pixel buffer, 64 TDC channels over
// four banks of 64 pixels and the 320 us frame.  The word width of the
// random output and the Peres recursion depths are this design's choices.
package qrng_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned N_PIX        = 64;      // TDC channels / pixels per bank
  localparam int unsigned N_BANKS      = 4;       // four linear arrays of 64 pixels
  localparam int unsigned N_TAPS       = 140;     // 35 carry elements x 4 bits
  localparam int unsigned FINE_W       = 8;       // ceil(log2(140))
  localparam int unsigned TAG_W        = 28;      // 2^28 bins
  localparam int unsigned COARSE_W     = 21;      // 2^28 / 140 < 2^21
  localparam int unsigned COARSE_MAX   = (1 << TAG_W) / N_TAPS; // periods that fit in 2^28 bins
  localparam int unsigned BUF_DEPTH    = 512;     // tags per pixel per frame
  localparam int unsigned FRAME_CYCLES = 128000;  // 320 us at 400 MHz
  localparam int unsigned HOLDOFF_LINO = 80;      // 200 ns / 2.5 ns
  localparam int unsigned HOLDOFF_RANDY = 18;     // 180 ns / 10 ns
  localparam int unsigned WORD_W       = 32;      // random output word

  // A time tag: coarse period count and fine delay-line code.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_hit_t;

  // Source identifier of an output word: coarse or fine path of a pixel.
  typedef enum logic {SRC_COARSE = 1'b0, SRC_FINE = 1'b1} src_path_e;

  // Number of nodes of a Peres tree of the given recursion depth.
  function automatic int unsigned peres_nodes(input int unsigned depth);
    return (1 << depth) - 1;
  endfunction
endpackage
