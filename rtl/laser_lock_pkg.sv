// laser_lock_pkg: widths, types and constants shared by the laser-lock datapath.
//
// The signal chain works on 16-bit signed samples. The converter on the analog
// input delivers 12-bit codes, which are widened to 16 bits on entry; every
// analog output is narrowed back to 12 bits before its converter. Between the
// two, all blocks advance once per loop iteration, marked by a one-cycle
// `sample` strobe (LOOP_TICKS clock cycles apart).
//
// The control word `lock_ctrl_t` collects every setting an operator chooses
// from the host: generator frequencies, the demodulation phase, the gains,
// the PID coefficients and output range, the scan offset, the step size and
// the two switches (scan/lock and step on/off). Its field widths and number
// formats are this design's own choices; the paper names the settings but not
// their encodings.
package laser_lock_pkg;

  // Converter and internal sample widths (12-bit converters, 16-bit datapath).
  localparam int unsigned ADC_W    = 12;
  localparam int unsigned DAC_W    = 12;
  localparam int unsigned SAMPLE_W = 16;

  // Numerically controlled oscillators: phase accumulator width and the
  // number of phase bits that address the sine table.
  localparam int unsigned PHASE_W   = 32;
  localparam int unsigned LUT_ABITS = 10;

  // PID coefficients are signed fixed point with PID_FRAC fractional bits.
  localparam int unsigned COEF_W   = 32;
  localparam int unsigned PID_FRAC = 20;

  // Gain stage: signed integer multiplier and a signed power-of-two shift.
  localparam int unsigned GAIN_W  = 16;
  localparam int unsigned SHIFT_W = 6;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [ADC_W-1:0]    adc_code_t;
  typedef logic signed [DAC_W-1:0]    dac_code_t;
  typedef logic        [PHASE_W-1:0]  phase_t;

  typedef enum logic {
    MODE_SCAN = 1'b0,
    MODE_LOCK = 1'b1
  } lock_mode_e;

  // One gain block: out = saturate((in * mult) * 2^shift).
  typedef struct packed {
    logic signed [GAIN_W-1:0]  mult;
    logic signed [SHIFT_W-1:0] shift;
  } gain_t;

  typedef struct packed {
    lock_mode_e                mode;        // scan/lock switch
    logic                      step_on;     // step on/off switch
    logic                      mon_en;      // push samples to the host FIFO
    phase_t                    mod_fcw;     // modulation generator frequency word
    phase_t                    scan_fcw;    // scan generator frequency word
    phase_t                    ref_phase;   // demodulation phase theta
    gain_t                     ref_gain;    // gain after the phase block
    gain_t                     mix_gain;    // gain after the multiplier
    gain_t                     mod_gain;    // gain in front of AO2
    gain_t                     scan_gain;   // gain on the scan generator
    sample_t                   scan_offset; // offset added to the scan
    sample_t                   step_size;   // value added by the step switch
    logic signed [COEF_W-1:0]  kp;          // P parameter
    logic signed [COEF_W-1:0]  ki;          // I parameter
    logic signed [COEF_W-1:0]  kd;          // D parameter
    sample_t                   out_high;    // PID output upper limit
    sample_t                   out_low;     // PID output lower limit
  } lock_ctrl_t;

  // Saturate a wide signed value to SAMPLE_W bits.
  function automatic sample_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return sample_t'(16'sh7FFF);
    else if (v < -64'sd32768) return sample_t'(16'sh8000);
    else                      return sample_t'(v[SAMPLE_W-1:0]);
  endfunction

endpackage
