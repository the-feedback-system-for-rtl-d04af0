// lmbf_pkg: types, constants and arithmetic helpers shared by the longitudinal
// mode-by-mode feedback processor.
//
// All signal paths carry 16-bit two's-complement samples in Q1.15 (full scale
// = +/-1.0). Phases are 32-bit unsigned fractions of one turn (2^32 = 360 deg),
// frequencies are the matching DDS tuning words (phase step per clock).
// The 144 MHz system clock, the 16-bit ADC and DAC words, the six harmonic
// channels, the x32 CIC clock and the two CIC stages come from the paper; the
// fixed-point formats and the gain scaling are this design's own choices.
package lmbf_pkg;

  localparam int unsigned SAMPLE_W   = 16;   // ADC and DAC word width
  localparam int unsigned PHASE_W    = 32;   // phase accumulator width
  localparam int unsigned N_HARM     = 6;    // harmonic feedback blocks
  localparam int unsigned GAIN_FRAC  = 8;    // fractional bits of the PI gains
  localparam int unsigned CORDIC_ITER = 16;  // CORDIC micro-rotations
  localparam int unsigned CORDIC_LAT  = CORDIC_ITER + 2; // CORDIC latency in clocks

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [PHASE_W-1:0]  phase_t;

  // One complex baseband sample.
  typedef struct packed {
    sample_t i;
    sample_t q;
  } iq_t;

  // Which synchrotron sideband a harmonic block detects and drives.
  typedef enum logic {
    SB_USB = 1'b0,
    SB_LSB = 1'b1
  } sideband_e;

  // Run-time settings of one harmonic feedback block.
  typedef struct packed {
    logic [7:0]         harmonic;   // h: harmonic of the revolution frequency
    logic [2:0]         m;          // synchrotron harmonic (1 dipole, 2 quadrupole)
    sideband_e          sideband;   // sideband selected for the feedback
    logic               fb_enable;  // 1: PI loop closed, 0: reference played open loop
    logic               out_enable; // block contributes to the DAC sum
    logic signed [15:0] kp;         // proportional gain, GAIN_FRAC fractional bits
    logic signed [15:0] ki;         // integral gain per CIC tick, GAIN_FRAC fractional bits
  } chan_cfg_t;

  // Saturate a wide signed value to one sample.
  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  // Q1.15 product, full 32-bit result scaled back by 2^15 (not saturated).
  function automatic logic signed [31:0] qmul(input sample_t a, input sample_t b);
    logic signed [31:0] p;
    p = a * b;
    return p >>> 15;
  endfunction

endpackage
