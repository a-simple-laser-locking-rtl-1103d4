// pid_controller: the PID loop that turns the error signal into the piezo
// feedback in lock mode.
//
//     u[n] = kp*e[n] + I[n] + kd*(e[n] - e[n-1]),   I[n] = I[n-1] + ki*e[n]
//
// kp, ki and kd are the P, I and D parameters, signed fixed point with
// PID_FRAC (20) fractional bits; ki and kd are per sample (the sample period
// is folded into them). The output is limited to [out_low, out_high], the
// output range set by the operator, and the integrator is clamped to the same
// range so that it cannot wind up while the output is saturated.
// While `enable` is low (scan mode) the controller holds its integrator at
// `preload`, the value the piezo has at that moment; when `enable` rises the
// loop therefore starts from the current piezo voltage instead of jumping.
// The P/I/D structure follows the paper; the fixed-point format, the output
// range clamp of the integrator and the preload are this design's choices.
// Timing: `u` is valid with `out_valid`, one cycle after `in_valid`.
module pid_controller
  import laser_lock_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic                     in_valid,
  input  sample_t                  e,
  input  logic signed [COEF_W-1:0] kp,
  input  logic signed [COEF_W-1:0] ki,
  input  logic signed [COEF_W-1:0] kd,
  input  sample_t                  out_high,
  input  sample_t                  out_low,
  input  sample_t                  preload,
  output sample_t                  u,
  output logic                     out_valid
);

  localparam int unsigned AW = COEF_W + SAMPLE_W + 8;

  logic signed [AW-1:0] integ, integ_next, p_term, d_term, sum;
  logic signed [AW-1:0] hi_lim, lo_lim, preload_w;
  sample_t              e_prev;
  sample_t              u_next;

  assign hi_lim    = AW'(out_high) <<< PID_FRAC;
  assign lo_lim    = AW'(out_low)  <<< PID_FRAC;
  assign preload_w = AW'(preload)  <<< PID_FRAC;

  always_comb begin
    p_term     = AW'(kp) * AW'(e);
    d_term     = AW'(kd) * (AW'(e) - AW'(e_prev));
    integ_next = integ + AW'(ki) * AW'(e);
    if (integ_next > hi_lim)      integ_next = hi_lim;
    else if (integ_next < lo_lim) integ_next = lo_lim;
    sum = (p_term + integ_next + d_term) >>> PID_FRAC;
    if (sum > AW'(out_high))      u_next = out_high;
    else if (sum < AW'(out_low))  u_next = out_low;
    else                          u_next = sample_t'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ     <= '0;
      e_prev    <= '0;
      u         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (!enable) begin
        integ  <= preload_w;
        e_prev <= e;
        u      <= preload;
      end else if (in_valid) begin
        integ  <= integ_next;
        e_prev <= e;
        u      <= u_next;
      end
    end
  end

endmodule
