// tb_lowpass_filter: runs the 4th-order 500 Hz Butterworth filter at the
// default sample rate (40 MHz / 318) against a floating-point model of the
// same filter (bilinear transform, coefficients from tan() here) and checks:
// every output within 4 LSB of the model; output valid three cycles after
// the input; unit DC gain (step settles to the input); a 100 Hz tone passes
// with amplitude within 2 %; a 4 kHz tone (the modulation) is attenuated by
// more than 60 dB, as a 4th-order filter eight times above cut-off must be.
module tb_lowpass_filter;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  sample_t in, out;
  int checks = 0, failures = 0;
  localparam real FS = 40.0e6 / 318.0;
  localparam real PI = 3.14159265358979;

  lowpass_filter dut (.clk, .rst_n, .in_valid, .in, .out, .out_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // floating-point reference: two biquads
  real b0[2], b1[2], b2[2], a1[2], a2[2];
  real xs1[2], xs2[2], ys1[2], ys2[2];

  function automatic real model(input real x);
    real v, y;
    v = x;
    for (int s = 0; s < 2; s++) begin
      y = b0[s]*v + b1[s]*xs1[s] + b2[s]*xs2[s] - a1[s]*ys1[s] - a2[s]*ys2[s];
      xs2[s] = xs1[s]; xs1[s] = v; ys2[s] = ys1[s]; ys1[s] = y;
      v = y;
    end
    return v;
  endfunction

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int worst = 0;
  int n_bad = 0;

  task automatic step(input int x, output int y);
    real m;
    int d;
    in = sample_t'(x);
    m = model(real'(x));
    @(posedge clk) in_valid <= 1'b1;
    @(posedge clk) in_valid <= 1'b0;
    @(posedge clk); @(posedge clk);
    #1;
    if (!out_valid) n_bad++;
    @(posedge clk); #1;
    if (out_valid) n_bad++;
    y = int'(out);
    d = y - $rtoi($floor(m + 0.5));
    if (d < 0) d = -d;
    if (d > worst) worst = d;
  endtask

  initial begin
    real k, q, den;
    int y, ymax, ymin;
    for (int s = 0; s < 2; s++) begin
      k = $tan(PI * 500.0 / FS);
      q = 1.0 / (2.0 * $sin(real'(2*s+1) * PI / 8.0));
      den = 1.0 + k/q + k*k;
      a1[s] = 2.0 * (k*k - 1.0) / den;
      a2[s] = (1.0 - k/q + k*k) / den;
      b0[s] = k*k / den; b1[s] = 2.0*b0[s]; b2[s] = b0[s];
      xs1[s] = 0; xs2[s] = 0; ys1[s] = 0; ys2[s] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // step to 10000: settles to the input (unit DC gain)
    for (int n = 0; n < 3000; n++) step(10000, y);
    check(y >= 9999 && y <= 10001, $sformatf("DC gain: step settles at %0d", y));
    // 100 Hz tone, amplitude 10000
    ymax = -40000; ymin = 40000;
    for (int n = 0; n < 6000; n++) begin
      step($rtoi(10000.0 * $sin(2.0*PI*100.0*real'(n)/FS)), y);
      if (n > 3000) begin if (y > ymax) ymax = y; if (y < ymin) ymin = y; end
    end
    check(ymax > 9800 && ymax < 10200 && ymin < -9800 && ymin > -10200,
          $sformatf("100 Hz passes: %0d..%0d", ymin, ymax));
    // 4 kHz tone, amplitude 20000: below 20 after 60 dB
    ymax = -40000; ymin = 40000;
    for (int n = 0; n < 4000; n++) begin
      step($rtoi(20000.0 * $sin(2.0*PI*4000.0*real'(n)/FS)), y);
      if (n > 2000) begin if (y > ymax) ymax = y; if (y < ymin) ymin = y; end
    end
    check(ymax < 20 && ymin > -20, $sformatf("4 kHz stopped: %0d..%0d", ymin, ymax));
    check(worst <= 4, $sformatf("largest deviation from model %0d LSB", worst));
    check(n_bad == 0, $sformatf("%0d samples with wrong latency", n_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
