// tb_p_sweep: the PID optimisation workload. The loop is locked to the line
// of the behavioural laser model (tb/laser_spectroscopy_model.sv), then the
// step switch puts a disturbance of one half width on the piezo, for a
// series of P values with I and D held fixed. For each P the step response
// time is measured: from the step until the laser stays within 2 codes of
// the line for 100 iterations. The P values run over 0.0155 to 0.0296 (the
// range explored for the original system, in this design's own units) and
// then on to larger values until the loop rings.
// Checks: every P in the explored range settles within 20 ms without
// overshoot; at large P the response overshoots and rings (oscillation sets
// in). With this model the response time is set mostly by the I term and
// stays near 5-6 ms over the explored range, so its trend with P is printed,
// not checked. The whole design runs at its default parameters.
module tb_p_sweep;
  import laser_lock_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  adc_code_t ai;
  logic ai_sample, dac_update, mon_valid;
  dac_code_t ao1, ao2, audio_out;
  logic host_wr_en = 1'b0;
  logic [4:0] host_wr_addr = '0, host_rd_addr = '0;
  logic [31:0] host_wr_data = '0, host_rd_data;
  logic [47:0] mon_data;
  real disturbance = 0.0, detuning;
  int checks = 0, failures = 0;

  localparam real PEAK = 300.0;
  localparam real FS   = 40.0e6 / 318.0;

  laser_lock_top dut (
    .clk, .rst_n, .ai, .ai_sample, .ao1, .ao2, .audio_out, .dac_update,
    .host_wr_en, .host_wr_addr, .host_wr_data, .host_rd_addr, .host_rd_data,
    .mon_data, .mon_valid, .mon_ready(1'b1)
  );

  laser_spectroscopy_model #(.PEAK(PEAK)) plant (
    .clk, .dac_update, .ao1, .ao2, .disturbance, .ai, .detuning
  );

  always #12.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
    else $display("ok:   %s", what);
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk) begin host_wr_en <= 1'b1; host_wr_addr <= 5'(a); host_wr_data <= d; end
    @(posedge clk) host_wr_en <= 1'b0;
  endtask

  task automatic samples(input int n);
    repeat (n) @(posedge clk iff dac_update);
  endtask

  // iterations until |detuning| stays below tol for 100 iterations;
  // also the largest excursion past the line (overshoot, in codes)
  task automatic settle(input real sgn, input int limit, output int n, output real over);
    int n_in;
    n_in = 0; n = 0; over = 0.0;
    while (n_in < 100 && n < limit) begin
      samples(1); n++;
      if (sgn * detuning < -over) over = -sgn * detuning;
      if (detuning < 2.0 && detuning > -2.0) n_in++; else n_in = 0;
    end
    n = n - 100;
  endtask

  initial begin : watchdog
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pv [10] = '{0.0155, 0.0175, 0.0195, 0.0215, 0.0235, 0.0255, 0.0296, 0.08, 0.16, 0.3};
    real t_ms [10];
    real over [10];
    int n;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    wr(7,  {10'd0, 6'sd0, 16'sd0});                 // no scan: piezo = offset
    wr(8,  32'((int'(PEAK) + 10) * 16));             // start 10 codes off the line
    wr(11, 32'sd839);                                // ki = 0.0008 per sample
    wr(9,  32'(16 * 40));                            // step: one half width
    wr(10, 32'($rtoi(pv[0] * 1048576.0)));
    samples(100);
    wr(0, 32'h1);                                    // lock
    settle(1.0, 20000, n, over[0]);
    check(n < 19900, $sformatf("locked after %0d iterations", n));
    for (int k = 0; k < 10; k++) begin
      wr(10, 32'($rtoi(pv[k] * 1048576.0)));
      samples(500);
      wr(0, 32'h3);                                  // step on: laser pushed above the line
      settle(1.0, 20000, n, over[k]);
      t_ms[k] = real'(n) * 1000.0 / FS;
      $display("P = %6.4f: step response %6.2f ms, overshoot %5.1f codes", pv[k], t_ms[k], over[k]);
      wr(0, 32'h1);                                  // step off
      samples(3000);
    end
    for (int k = 0; k < 7; k++)
      check(t_ms[k] < 20.0, $sformatf("P = %6.4f settles in %0.2f ms (< 20 ms)", pv[k], t_ms[k]));
    for (int k = 0; k < 9; k++)
      check(over[k] < 2.0, $sformatf("P = %6.4f: no overshoot (%0.1f codes)", pv[k], over[k]));
    check(over[9] > 2.0, $sformatf("large P rings: overshoot %0.1f codes at P = %0.2f", over[9], pv[9]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
