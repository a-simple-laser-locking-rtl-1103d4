// mixer: the multiplier of the lock-in demodulator.
//
// Multiplies the 16-bit spectroscopy sample with the 16-bit phase-shifted
// reference and keeps the full 32-bit signed product. After the low-pass
// filter removes the terms at the modulation frequency and its harmonic, the
// product's mean is proportional to delta*cos(theta) - phi*sin(theta), which
// at theta = 0 is the derivative of the absorption feature: the error signal.
// Multiplication follows the paper; the full-width product (the following
// gain block chooses which bits to keep) is this design's choice.
// Timing: registered; `prod` is valid with `out_valid`, one cycle after
// `in_valid`.
module mixer
  import laser_lock_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  sample_t                      a,
  input  sample_t                      b,
  output logic signed [2*SAMPLE_W-1:0] prod,
  output logic                         out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) prod <= a * b;
    end
  end

endmodule
