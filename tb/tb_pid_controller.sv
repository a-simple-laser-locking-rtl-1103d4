// tb_pid_controller: compares the controller with a 64-bit integer model of
//   u = clamp(kp*e + I + kd*(e - e_prev)) >> 20, I = clamp(I + ki*e),
// over random errors and coefficients; checks the preload while disabled,
// the output limits, the integrator clamp (no wind-up: the output leaves the
// limit as soon as the error changes sign) and the one-cycle latency.
module tb_pid_controller;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, in_valid = 1'b0, out_valid;
  sample_t e, out_high, out_low, preload, u;
  logic signed [31:0] kp, ki, kd;
  int checks = 0, failures = 0;

  pid_controller dut (.clk, .rst_n, .enable, .in_valid, .e, .kp, .ki, .kd,
                      .out_high, .out_low, .preload, .u, .out_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint m_i, m_eprev;

  function automatic int model(input int ev);
    longint hi, lo, s;
    hi = longint'(out_high) <<< 20;
    lo = longint'(out_low) <<< 20;
    m_i = m_i + longint'(ki) * longint'(ev);
    if (m_i > hi) m_i = hi;
    if (m_i < lo) m_i = lo;
    s = (longint'(kp) * longint'(ev) + m_i + longint'(kd) * (longint'(ev) - m_eprev)) >>> 20;
    m_eprev = longint'(ev);
    if (s > longint'(out_high)) s = longint'(out_high);
    if (s < longint'(out_low)) s = longint'(out_low);
    return int'(s);
  endfunction

  task automatic run(input int ev, output int y);
    int exp_u;
    e = sample_t'(ev);
    exp_u = model(ev);
    @(posedge clk) in_valid <= 1'b1;
    @(posedge clk) in_valid <= 1'b0;
    #1 check(out_valid, "valid one cycle after in_valid");
    y = int'(u);
    check(y == exp_u, $sformatf("e=%0d u=%0d exp %0d", ev, y, exp_u));
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y;
    out_high = 16'sd500; out_low = -16'sd500;
    kp = 32'sd1 <<< 20; ki = 32'sd1 <<< 16; kd = 32'sd1 <<< 18;
    preload = 16'sd123; e = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // disabled: output follows the preload
    repeat (3) @(posedge clk);
    #1 check(u == 16'sd123, $sformatf("preload while disabled: %0d", u));
    // enable: model starts from the preload
    enable = 1'b1;
    m_i = longint'(preload) <<< 20; m_eprev = 0;
    for (int n = 0; n < 1500; n++) begin
      if (n % 300 == 0) begin
        kp = 32'($urandom_range(0, 4 << 20)) - (32'sd2 <<< 20);
        ki = 32'($urandom_range(0, 1 << 18));
        kd = 32'($urandom_range(0, 1 << 20));
      end
      run($urandom_range(0, 800) - 400, y);
    end
    // wind-up test: a long positive error drives the output to the limit
    kp = '0; kd = '0; ki = 32'sd1 <<< 20;
    for (int n = 0; n < 200; n++) run(1000, y);
    check(y == 500, $sformatf("output held at the high limit: %0d", y));
    run(-10, y);
    check(y < 500, $sformatf("no wind-up: output leaves the limit at once (%0d)", y));
    for (int n = 0; n < 200; n++) run(-1000, y);
    check(y == -500, $sformatf("output held at the low limit: %0d", y));
    // disable again: preload takes over
    enable = 1'b0; preload = -16'sd77;
    repeat (2) @(posedge clk);
    #1 check(u == -16'sd77, $sformatf("preload after disable: %0d", u));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
