// tdc_pkg -- sizes and helpers shared by the wave-union TDC.
//
// One TDC channel samples a carry chain of CARRY8 cells. Every CARRY8 has
// eight delay elements and each element gives two taps (its O and CO
// outputs), so a CARRY8 gives 16 taps. The first LAUNCH_TAPS taps belong to
// the wave-union launcher, the rest to the tapped delay line proper. The
// 1920 sampled taps are split into 64 interleaved sub-TDLs of 30 taps each;
// the bidirectional encoder finds four edges in every sub-TDL and the 256
// edge positions are summed into the fine code.
//
// Taken from the paper: 1920 taps per channel, 368 launcher taps, 64
// sub-TDLs, positive pulse 80 taps, negative pulse 112 taps, 6-input pattern
// detectors (5-tap window). Own choices: coarse counter width, the element
// delays used by the behavioural carry-chain model, the tap order inside an
// element (O before CO).
package tdc_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned TAPS_PER_CARRY8 = 16;
  localparam int unsigned N_TAPS          = 1920; // taps per channel
  localparam int unsigned N_SUB           = 64;   // sub-TDLs per channel
  localparam int unsigned LAUNCH_TAPS     = 368;  // taps used by the launcher
  localparam int unsigned POS_TAPS        = 80;   // positive pulse width
  localparam int unsigned NEG_TAPS        = 112;  // negative pulse width
  localparam int unsigned PAT_WIN         = 5;    // zeros the pattern detectors need
  localparam int unsigned N_EDGES         = 4;    // edges of the 01010 pattern
  localparam int unsigned COARSE_W        = 16;

  // Delay of one MUX element in the behavioural carry-chain model (ps), for a
  // rising and a falling transition. 1250 taps cover one 2222 ps period of
  // the 450 MHz clock, i.e. about 1.78 ps per tap and 3.56 ps per element on
  // average; rising edges are made slightly faster than falling ones, so the
  // four edges of the wave drift apart as it travels.
  localparam real RISE_PS = 3.50;
  localparam real FALL_PS = 3.62;

  // Edge index inside the four one-hot codes of one sub-TDL.
  typedef enum logic [1:0] {
    EDGE_RISE_PAT  = 2'd0, // "10" seen by the rising pattern detector (lower 1-block)
    EDGE_RISE_EDGE = 2'd1, // remaining "10" from the rising edge detector (upper 1-block)
    EDGE_FALL_PAT  = 2'd2, // "01" seen by the falling pattern detector (upper 1-block)
    EDGE_FALL_EDGE = 2'd3  // remaining "01" from the falling edge detector (lower 1-block)
  } edge_e;

  function automatic int unsigned clog2(input int unsigned v);
    int unsigned r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction
endpackage
