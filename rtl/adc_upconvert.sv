// adc_upconvert: takes the analog input AI into the 16-bit datapath.
//
// The spectroscopy signal arrives from the converter as a 12-bit two's
// complement code. On each `sample` strobe this block captures the code and
// widens it to 16 bits by placing it in the upper bits (a left shift by
// SAMPLE_W - ADC_W = 4), so full scale at the input is full scale inside the
// datapath. The widening to 16 bits follows the paper; treating the code as
// two's complement and widening by a shift (rather than sign extension
// alone) are this design's choices. Timing: `spec` is valid with `out_valid`,
// one cycle after `sample`, and holds until the next strobe.
module adc_upconvert
  import laser_lock_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sample,
  input  adc_code_t ai,
  output sample_t   spec,
  output logic      out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spec      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= sample;
      if (sample) spec <= {ai, {(SAMPLE_W - ADC_W){1'b0}}};
    end
  end

endmodule
