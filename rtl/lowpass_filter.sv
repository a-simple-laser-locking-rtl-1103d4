// lowpass_filter: the low-pass filter that turns the mixer output into the
// error signal.
//
// A Butterworth low-pass of order ORDER (4) with cut-off FC_HZ (500 Hz), run
// at the loop's sample rate CLK_HZ / LOOP_TICKS. It removes the terms at the
// modulation frequency (several kHz) and twice it, and keeps the slowly
// varying lock-in signal. The order, the Butterworth type and the 500 Hz
// cut-off follow the paper; the realisation is this design's choice: ORDER/2
// second-order sections in cascade, each from the bilinear transform of one
// analog Butterworth pole pair,
//     K = tan(pi*FC/FS),  1/Q_k = 2*sin((2k-1)*pi/(2*ORDER)),
//     a1 = 2(K^2-1)/(1+K/Q+K^2),  a2 = (1-K/Q+K^2)/(1+K/Q+K^2),
//     b0 = b2 = (1+a1+a2)/4,  b1 = 2*b0   (exactly unit gain at DC).
// The coefficients are computed at elaboration in Q30 integer arithmetic
// (Taylor series for sin and cos), so changing FC_HZ or the sample rate
// needs no external tool. Samples travel between sections with 16 extra
// fractional bits and 8 bits of headroom.
// Timing: `out` is valid with `out_valid`, ORDER/2 + 1 cycles after
// `in_valid`; the filter advances once per valid input.
module lowpass_filter
  import laser_lock_pkg::*;
#(
  parameter int unsigned ORDER      = 4,
  parameter int unsigned FC_HZ      = 500,
  parameter int unsigned CLK_HZ     = 40_000_000,
  parameter int unsigned LOOP_TICKS = 318
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in,
  output sample_t out,
  output logic    out_valid
);

  localparam int unsigned NSEC = ORDER / 2;
  localparam int unsigned FRAC = 16;
  localparam int unsigned W    = SAMPLE_W + FRAC + 8;

  localparam longint ONE    = 64'sd1 <<< 30;
  localparam longint PI_Q30 = 64'sd3373259426;

  function automatic longint sin_q30(input longint x);
    longint x2, term, acc;
    acc = x; term = x;
    x2  = (x * x) >>> 30;
    for (int k = 1; k <= 6; k++) begin
      term = -(((term * x2) >>> 30) / longint'((2 * k) * (2 * k + 1)));
      acc  = acc + term;
    end
    return acc;
  endfunction

  function automatic longint cos_q30(input longint x);
    longint x2, term, acc;
    acc = ONE; term = ONE;
    x2  = (x * x) >>> 30;
    for (int k = 1; k <= 6; k++) begin
      term = -(((term * x2) >>> 30) / longint'((2 * k - 1) * (2 * k)));
      acc  = acc + term;
    end
    return acc;
  endfunction

  // K = tan(pi * FC / FS) with FS = CLK_HZ / LOOP_TICKS.
  function automatic longint k_q30();
    longint w;
    w = (PI_Q30 * longint'(FC_HZ) * longint'(LOOP_TICKS)) / longint'(CLK_HZ);
    return (sin_q30(w) <<< 30) / cos_q30(w);
  endfunction

  // 1/Q of section s (0-based).
  function automatic longint invq_q30(input int unsigned s);
    return 2 * sin_q30((PI_Q30 * longint'(2 * s + 1)) / longint'(2 * ORDER));
  endfunction

  function automatic longint coef_a1(input int unsigned s);
    longint k, k2, den;
    k   = k_q30();
    k2  = (k * k) >>> 30;
    den = ONE + ((k * invq_q30(s)) >>> 30) + k2;
    return ((2 * (k2 - ONE)) <<< 30) / den;
  endfunction

  function automatic longint coef_a2(input int unsigned s);
    longint k, k2, kq, den;
    k   = k_q30();
    k2  = (k * k) >>> 30;
    kq  = (k * invq_q30(s)) >>> 30;
    den = ONE + kq + k2;
    return ((ONE - kq + k2) <<< 30) / den;
  endfunction

  function automatic longint coef_b0(input int unsigned s);
    return (ONE + coef_a1(s) + coef_a2(s)) / 4;
  endfunction

  logic signed [W-1:0] stage_x [NSEC+1];
  logic                stage_v [NSEC+1];

  assign stage_x[0] = W'(in) <<< FRAC;
  assign stage_v[0] = in_valid;

  for (genvar s = 0; s < NSEC; s++) begin : g_sec
    biquad #(
      .W  (W),
      .B0 (coef_b0(s)),
      .B1 (2 * coef_b0(s)),
      .B2 (coef_b0(s)),
      .A1 (coef_a1(s)),
      .A2 (coef_a2(s))
    ) u_sec (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (stage_v[s]),
      .x         (stage_x[s]),
      .y         (stage_x[s+1]),
      .out_valid (stage_v[s+1])
    );
  end

  // Back to a 16-bit sample: round away the extra fraction, then saturate.
  logic signed [W-1:0] rounded;
  assign rounded = (stage_x[NSEC] + (W'(1) <<< (FRAC - 1))) >>> FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= stage_v[NSEC];
      if (stage_v[NSEC]) begin
        if (rounded > W'(32767))       out <= 16'sh7FFF;
        else if (rounded < -W'(32768)) out <= 16'sh8000;
        else                           out <= sample_t'(rounded);
      end
    end
  end

endmodule
