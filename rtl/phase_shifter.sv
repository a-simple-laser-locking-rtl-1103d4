// phase_shifter: the "phase" block between the modulation generator and the
// demodulator.
//
// Lock-in detection multiplies the spectroscopy signal with a copy of the
// modulation shifted by a phase theta; choosing theta so that the detected
// in-phase term is maximal leaves the derivative of the absorption feature.
// This block adds the phase word `theta` (2^PHASE_W = one full turn) to the
// modulation oscillator's accumulator and looks the sum up in its own sine
// table, so the shifted copy keeps exact frequency lock with the modulation.
// Timing: `sine_shifted` follows `phase` by one clock, the same latency as
// the generator's own table, so both outputs are valid on the generator's
// `out_valid`. Doing the shift on the phase word is this design's choice;
// the paper shows a phase block but not how it works.
module phase_shifter
  import laser_lock_pkg::*;
(
  input  logic    clk,
  input  phase_t  phase,
  input  phase_t  theta,
  output sample_t sine_shifted
);

  phase_t shifted;

  assign shifted = phase + theta;

  sine_lut u_lut (
    .clk   (clk),
    .phase (shifted),
    .sine  (sine_shifted)
  );

endmodule
