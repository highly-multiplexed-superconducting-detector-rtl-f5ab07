// mkid_pkg: types and constants shared by the MKID readout datapath.
//
// Sizes follow the block design of the readout: a 4096-bin oversampled
// filter bank delivers 16 complex bins per 512 MHz cycle (512-bit bus),
// bin selection keeps 2048 channels at 8 per cycle (256-bit bus), and
// after the decimate-by-2 lowpass the phase streams carry 4 channels per
// cycle (64-bit bus). Sample widths (16-bit I, Q and phase) and the
// photon record layout are this design's own choices.
//
// Angle convention used everywhere: a signed 16-bit phase where the full
// circle is 2^16, i.e. +32767 is just below +pi and -32768 is -pi.
package mkid_pkg;

  localparam int unsigned N_OPFB_BINS  = 4096; // filter-bank bins
  localparam int unsigned N_CHAN       = 2048; // resonator channels
  localparam int unsigned OPFB_LANES   = 16;   // bins per cycle, 512-bit bus
  localparam int unsigned IQ_LANES     = 8;    // channels per cycle, 256-bit bus
  localparam int unsigned PHASE_LANES  = 4;    // phases per cycle, 64-bit bus
  localparam int unsigned SAMPLE_W     = 16;

  // One complex sample. Q in the upper half so that lane 0 I sits at bit 0.
  typedef struct packed {
    logic signed [SAMPLE_W-1:0] q;
    logic signed [SAMPLE_W-1:0] i;
  } iq_t;

  // One photon event as written to memory (64 bits, four per 256-bit word).
  typedef struct packed {
    logic [31:0]                time_us; // decimated sample count (1 us ticks)
    logic [15:0]                chan;    // channel number
    logic signed [SAMPLE_W-1:0] phase;   // filtered phase at the trigger
  } photon_t;

  // CORDIC angle table: atan(2^-i) in units where the full circle is 2^20
  // (16-bit phase with four guard bits).
  localparam int unsigned CORDIC_ANGLE_W = 20;
  function automatic logic signed [CORDIC_ANGLE_W-1:0] cordic_atan(input int i);
    case (i)
      0: return 20'sd131072;  1: return 20'sd77376;  2: return 20'sd40884;
      3: return 20'sd20753;   4: return 20'sd10417;  5: return 20'sd5213;
      6: return 20'sd2607;    7: return 20'sd1304;   8: return 20'sd652;
      9: return 20'sd326;    10: return 20'sd163;   11: return 20'sd81;
     12: return 20'sd41;     13: return 20'sd20;    14: return 20'sd10;
     default: return 20'sd5;
    endcase
  endfunction

  // 1/(CORDIC gain) for 16 iterations, Q15.
  localparam int CORDIC_INV_GAIN_Q15 = 19898;

  function automatic logic signed [SAMPLE_W-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[SAMPLE_W-1:0];
  endfunction

endpackage
