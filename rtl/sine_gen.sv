// sine_gen: digital sine wave generator (numerically controlled oscillator).
//
// The design uses two of these: one makes the current modulation (to AO2 and,
// through the phase block, to the demodulator), the other makes the piezo
// scan in scan mode. A PHASE_W-bit phase accumulator advances by the
// frequency word `fcw` on every `sample` strobe, so the output frequency is
// f = fcw * f_sample / 2^PHASE_W. For example, at f_sample = 40 MHz / 318
// a 4 kHz modulation needs fcw = 136 579 960 and a 4 Hz scan fcw = 136 580.
// The accumulator value is exported as `phase` so that the phase block can
// read the same oscillator at a shifted phase.
//
// Timing: `phase` changes one cycle after `sample`; `sine`, looked up from
// it, is valid with `out_valid`, two cycles after `sample`. Reset clears the
// accumulator (the wave starts at phase 0). The accumulator width and the
// sine table are this design's choices.
module sine_gen
  import laser_lock_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sample,
  input  phase_t  fcw,
  output phase_t  phase,
  output sample_t sine,
  output logic    out_valid
);

  logic sample_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      sample_d  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (sample) phase <= phase + fcw;
      sample_d  <= sample;
      out_valid <= sample_d;
    end
  end

  sine_lut u_lut (
    .clk   (clk),
    .phase (phase),
    .sine  (sine)
  );

endmodule
