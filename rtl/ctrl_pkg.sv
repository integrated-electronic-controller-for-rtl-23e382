// ctrl_pkg: types and constants shared by the digital core of the
// photonic-circuit controller.
//
// The controller has NCH channels. Each channel reads one photodiode through
// a 10-bit ADC whose front-end gain is chosen among six steps of x4, and
// drives two heaters through two 12-bit DACs, one per dithering chain.
// Widths of the ADC (10 bit), DAC (12 bit), the number of gain steps (6) and
// channels (8) follow the paper. The layout of the configuration word
// (modes, bandwidth shift, dither amplitude, thresholds, manual words) is a
// choice of this design: the paper only says the configuration register sets
// "working parameters such as the control bandwidth" and lets the operating
// point be set by hand.
package ctrl_pkg;

  localparam int unsigned ADC_W    = 10;  // ADC resolution
  localparam int unsigned DAC_W    = 12;  // DAC resolution
  localparam int unsigned GSTEPS   = 6;   // front-end gain steps (x4 each)
  localparam int unsigned GAIN_W   = 3;   // bits to encode a gain step
  // ADC code rescaled by the inverse of the gain it was taken with:
  // 2 bits per x4 step over 5 steps on top of 10 bits.
  localparam int unsigned WSAMP_W  = ADC_W + 2 * (GSTEPS - 1);  // 20
  localparam int unsigned SHIFT_W  = 5;   // integrator gain 2^-shift
  localparam int unsigned AMP_W    = 8;   // dither amplitude, word LSBs

  // Operating mode of one chain.
  typedef enum logic [1:0] {
    MODE_HOLD   = 2'd0,  // keep the working point, no dither
    MODE_RUN    = 2'd1,  // closed loop: dither, demodulate, integrate
    MODE_MANUAL = 2'd2,  // working point forced to the manual word
    MODE_RSVD   = 2'd3   // behaves as HOLD
  } mode_e;

  // Configuration of one dithering chain (one heater).
  typedef struct packed {
    mode_e             mode;
    logic [AMP_W-1:0]  dith_amp;  // dither amplitude in control-word LSBs
    logic [DAC_W-1:0]  manual;    // control word used in MODE_MANUAL
  } chain_cfg_t;

  // Configuration shared by the two chains of one channel.
  typedef struct packed {
    logic               minimise; // 1: drive the PD power to a minimum, 0: maximum
    logic [SHIFT_W-1:0] bw_shift; // loop gain 2^-bw_shift (bandwidth)
    logic               sqrt_en;  // square-root compression on
    logic [DAC_W-1:0]   th_lo;    // saturation thresholds on the DAC code
    logic [DAC_W-1:0]   th_hi;
  } chan_cfg_t;

  typedef struct packed {
    chain_cfg_t a;  // chain on the 0-degree dither
    chain_cfg_t b;  // chain on the 90-degree dither
    chan_cfg_t  c;
  } channel_cfg_t;

  // Global configuration.
  typedef struct packed {
    logic [7:0] dith_quarter;  // samples per quarter of the dither period
  } global_cfg_t;

  localparam int unsigned CHAN_CFG_W = $bits(channel_cfg_t);
  localparam int unsigned GLOB_CFG_W = $bits(global_cfg_t);

  // What the monitor register captures for one channel.
  typedef struct packed {
    logic [ADC_W-1:0]  adc;
    logic [GAIN_W-1:0] gain;
    logic [DAC_W-1:0]  dac_a;
    logic [DAC_W-1:0]  dac_b;
  } mon_t;

  localparam int unsigned MON_W = $bits(mon_t);

endpackage
