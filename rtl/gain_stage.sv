// gain_stage: one of the "gain" blocks of the FPGA dataflow.
//
// Scales a signed IN_W-bit sample by an integer multiplier and a power of
// two, and saturates the result to a 16-bit sample:
//     out = saturate( in * mult * 2^shift )
// A negative `shift` is an arithmetic right shift (it rounds toward minus
// infinity). The multiplier/shift pair is how this design gives a fixed-point
// gain both fine steps and a large range; the operator interface of the
// original system shows its gains as such factors ("x2^n" gains and integer
// multiplications), but the arithmetic itself is this design's choice.
// Timing: registered; `out` is valid with `out_valid`, one cycle after
// `in_valid`, and holds its value until the next valid input.
module gain_stage
  import laser_lock_pkg::*;
#(
  parameter int unsigned IN_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in,
  input  gain_t                  gain,
  output sample_t                out,
  output logic                   out_valid
);

  localparam int unsigned PW = IN_W + GAIN_W;   // product width
  localparam int unsigned WW = PW + 32;          // room for a left shift

  logic signed [PW-1:0] prod;
  logic signed [WW-1:0] wide;
  sample_t              result;

  always_comb begin
    prod = PW'(in) * PW'(gain.mult);
    if (gain.shift < 0) wide = WW'(prod) >>> (-gain.shift);
    else                wide = WW'(prod) <<< gain.shift;
    if (wide > WW'(32767))       result = 16'sh7FFF;
    else if (wide < -WW'(32768)) result = 16'sh8000;
    else                         result = sample_t'(wide);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= result;
    end
  end

endmodule
