// tb_mod_freq_sweep: the modulation-frequency workload. For modulation
// frequencies from 2 to 20 kHz it measures the slope of the error signal at
// the peak: the laser (behavioural model, tb/laser_spectroscopy_model.sv) is
// parked 4 codes below and 4 codes above the line by the scan offset (scan
// gain zero), and the slope is the difference of the settled error signals
// over 8 codes. The demodulation phase is set to cancel the one-iteration
// delay between AO2 and AI (theta = -f_m / f_s of a turn).
// Checks, per frequency: the slope has the sign that gives negative feedback
// and is within 5 % of the 4 kHz slope (the model line has no frequency
// dependence, so only the digital chain could change it); the residual
// ripple of the error signal at the modulation frequency is below 2 % of the
// signal difference from 4 kHz up, and below 15 % at 2 kHz, which lies only
// a factor 4 above the filter's cut-off. The whole design runs at its default parameters.
module tb_mod_freq_sweep;
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

  laser_spectroscopy_model #(.PEAK(PEAK), .NOISE(0)) plant (
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

  // mean and peak-to-peak of the error signal over n iterations
  task automatic measure(input int n, output real mean, output int pp);
    int mn, mx;
    longint sum;
    mn = 40000; mx = -40000; sum = 0;
    for (int i = 0; i < n; i++) begin
      samples(1);
      @(negedge clk) host_rd_addr = 5'd17;
      #1;
      sum += longint'(int'($signed(host_rd_data)));
      if (int'($signed(host_rd_data)) < mn) mn = int'($signed(host_rd_data));
      if (int'($signed(host_rd_data)) > mx) mx = int'($signed(host_rd_data));
    end
    mean = real'(sum) / real'(n);
    pp = mx - mn;
  endtask

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int khz [6] = '{2, 4, 5, 10, 15, 20};
    real slope [6];
    real lo, hi;
    int pp_lo, pp_hi;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    wr(7, {10'd0, 6'sd0, 16'sd0});          // scan gain 0: piezo = offset
    wr(0, 32'h0);                           // scan mode
    for (int k = 0; k < 6; k++) begin
      real f, turns;
      f = real'(khz[k]) * 1000.0;
      turns = f / FS;                        // one iteration of delay
      wr(1, 32'($rtoi(f / FS * 4294967296.0)));
      wr(3, 32'(-longint'(turns * 4294967296.0)));
      wr(8, 32'((int'(PEAK) - 4) * 16));
      samples(1500);
      measure(400, lo, pp_lo);
      wr(8, 32'((int'(PEAK) + 4) * 16));
      samples(1500);
      measure(400, hi, pp_hi);
      slope[k] = (hi - lo) / 8.0;
      $display("f_m = %2d kHz: error %8.1f / %8.1f, slope %7.2f per code, ripple %0d / %0d",
               khz[k], lo, hi, slope[k], pp_lo, pp_hi);
      check(slope[k] < 0.0, $sformatf("%0d kHz: slope negative (restoring)", khz[k]));
      // A 4th-order filter passes (500 Hz / f_m)^4 of the ripple: at 2 kHz
      // that is 1/256, which leaves about 10 % here; from 4 kHz on, < 2 %.
      check(real'(pp_lo > pp_hi ? pp_lo : pp_hi) < ((khz[k] < 4) ? 0.15 : 0.02) * (lo - hi),
            $sformatf("%0d kHz: ripple %0d small against %0.1f", khz[k], pp_lo > pp_hi ? pp_lo : pp_hi, lo - hi));
    end
    for (int k = 0; k < 6; k++)
      check(slope[k] / slope[1] > 0.95 && slope[k] / slope[1] < 1.05,
            $sformatf("%0d kHz: slope %0.2f within 5%% of the 4 kHz slope %0.2f", khz[k], slope[k], slope[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
