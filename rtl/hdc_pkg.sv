// hdc_pkg: sizes and shared types of the in-memory spatio-temporal HDC encoder.
//
// The encoder turns N consecutive quantized samples of M channels into one
// D-bit N-gram hypervector. The hardware is sized for the largest settings
// the design is evaluated with: D = 10,000 dimensions, M = 4 EMG channels,
// N-gram sizes up to 9 and up to 21 quantization levels. The N-gram size and
// the number of levels are run-time settings per channel (the crossbar holds
// M * L_MAX rows), and the number of active channels is a run-time setting too.
// The bit widths derived below are this design's own choice.
package hdc_pkg;

  parameter int unsigned D     = 10000; // hypervector dimensions
  parameter int unsigned M     = 4;     // input channels (EMG electrodes)
  parameter int unsigned N_MAX = 9;     // largest N-gram size
  parameter int unsigned L_MAX = 21;    // largest number of quantization levels

  // Width of an N value 1 .. N_MAX and of an L value 1 .. L_MAX.
  parameter int unsigned NW = $clog2(N_MAX + 1);
  parameter int unsigned LCW = $clog2(L_MAX + 1);

  // Run-time encoding parameters of one channel.
  typedef struct packed {
    logic [NW-1:0]  n;  // N-gram size of this channel, 1 .. N_MAX
    logic [LCW-1:0] l;  // quantization levels of this channel, 1 .. L_MAX
  } chan_cfg_t;

endpackage
