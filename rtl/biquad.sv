// biquad: one second-order section of the low-pass filter (direct form I).
//
//     y[n] = b0*x[n] + b1*x[n-1] + b2*x[n-2] - a1*y[n-1] - a2*y[n-2]
//
// Coefficients are Q30 fixed point (1.0 = 2^30) given as parameters; samples
// are W-bit signed words whose scale the caller chooses (the low-pass filter
// gives them 16 fractional bits below the 16-bit sample, so that the very
// small b coefficients of a low cut-off do not lose the signal). The sum is
// formed at full precision and rounded to the nearest output word.
// Timing: on `in_valid` the section takes `x`, updates its four history
// registers and registers `y`, which is valid with `out_valid` one cycle
// later. Reset clears the history (the filter starts at rest).
module biquad #(
  parameter int unsigned W  = 40,
  parameter longint      B0 = 64'sd268435456,   // 0.25
  parameter longint      B1 = 64'sd536870912,   // 0.5
  parameter longint      B2 = 64'sd268435456,   // 0.25
  parameter longint      A1 = 64'sd0,
  parameter longint      A2 = 64'sd0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y,
  output logic                out_valid
);

  localparam int unsigned CW = 36;           // coefficient width (|c| < 2^35)
  localparam int unsigned AW = W + CW + 4;   // accumulator width

  localparam logic signed [CW-1:0] CB0 = CW'(B0);
  localparam logic signed [CW-1:0] CB1 = CW'(B1);
  localparam logic signed [CW-1:0] CB2 = CW'(B2);
  localparam logic signed [CW-1:0] CA1 = CW'(A1);
  localparam logic signed [CW-1:0] CA2 = CW'(A2);

  logic signed [W-1:0]  x1, x2, y1, y2;
  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] acc_r;

  always_comb begin
    acc = AW'(CB0) * AW'(x)  + AW'(CB1) * AW'(x1) + AW'(CB2) * AW'(x2)
        - AW'(CA1) * AW'(y1) - AW'(CA2) * AW'(y2);
    acc_r = (acc + (AW'(1) <<< 29)) >>> 30;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x2 <= x1;
        x1 <= x;
        y2 <= y1;
        y1 <= W'(acc_r);
        y  <= W'(acc_r);
      end
    end
  end

endmodule
