// laser_spectroscopy_model: behavioural model (not synthesizable) of what
// lies outside the FPGA: the output converters, the piezo and current
// drivers, the diode laser, the saturated-absorption spectroscopy and the
// input converter.
//
// The laser frequency, in units of one AO1 code, is
//     f = ao1 + MOD_COUPLING * ao2 + disturbance
// and the spectroscopy signal is one Lorentzian peak of half width HWHM
// centred at PEAK:
//     ai = round(AMPL / (1 + ((f - PEAK)/HWHM)^2) + BASE) + noise,
// clipped to the 12-bit range and presented on `ai` from the next converter
// update on. `detuning` (f - PEAK, modulation excluded) lets a testbench see
// how well the loop holds the laser on the peak.
module laser_spectroscopy_model #(
  parameter real PEAK         = 300.0,
  parameter real HWHM         = 40.0,
  parameter real MOD_COUPLING = 0.004,
  parameter real AMPL         = 1500.0,
  parameter real BASE         = -700.0,
  parameter int  NOISE        = 2
) (
  input  logic               clk,
  input  logic               dac_update,
  input  logic signed [11:0] ao1,
  input  logic signed [11:0] ao2,
  input  real                disturbance,
  output logic signed [11:0] ai,
  output real                detuning
);

  initial begin
    ai = '0;
    detuning = 0.0;
  end

  always @(posedge clk) begin
    if (dac_update) begin
      real f, x, s;
      int code;
      detuning = real'(ao1) + disturbance - PEAK;
      f = detuning + MOD_COUPLING * real'(ao2);
      x = f / HWHM;
      s = AMPL / (1.0 + x * x) + BASE;
      code = $rtoi($floor(s + 0.5)) + $urandom_range(0, 2 * NOISE) - NOISE;
      if (code > 2047) code = 2047;
      if (code < -2048) code = -2048;
      ai <= 12'(code);
    end
  end

endmodule
