// dac_downconvert: narrows a 16-bit datapath signal to a 12-bit converter code.
//
// Used for every analog output (AO1 piezo, AO2 current modulation and the
// audio monitor of the error signal). The 16-bit sample is rounded to the
// nearest 12-bit code (add half an output LSB, then drop the 4 low bits) and
// saturated, so a full-scale positive input gives 2047 rather than wrapping.
// The narrowing to 12 bits follows the paper; rounding and saturation are
// this design's choices. Timing: `code` is registered on `in_valid` and held
// until the next one, as a converter's input register would be.
module dac_downconvert
  import laser_lock_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  sample_t   in,
  output dac_code_t code
);

  localparam int unsigned DROP = SAMPLE_W - DAC_W;

  logic signed [SAMPLE_W:0] rounded;   // one guard bit for the rounding carry
  dac_code_t                narrowed;

  always_comb begin
    rounded = {in[SAMPLE_W-1], in} + (SAMPLE_W + 1)'(1 << (DROP - 1));
    if (rounded[SAMPLE_W] != rounded[SAMPLE_W-1]) narrowed = 12'sh7FF;
    else                                          narrowed = rounded[SAMPLE_W-1 -: DAC_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        code <= '0;
    else if (in_valid) code <= narrowed;
  end

endmodule
