// tb_mod_amp_sweep: the modulation-amplitude workload. At 4 kHz it measures
// the slope of the error signal at the peak for modulation amplitudes from
// 1/16 of full scale to full scale, set through the modulation gain
// (multiplier 1, shift -4 .. 0). The laser (behavioural model,
// tb/laser_spectroscopy_model.sv, with a coupling from AO2 to detuning of
// 0.02, so that full scale sweeps the laser by about one half-width of the
// line) is parked 4 codes below and 4 codes above the line by the scan
// offset, and the slope is the difference of the settled error signals over
// 8 codes. The demodulation phase cancels the one-iteration delay between
// AO2 and AI.
// Checks: every slope is restoring; the slope grows with the amplitude up
// to 1/2; for small amplitudes (1/16 to 1/4, a quarter of a half-width and
// less) the slope per unit amplitude stays within 10 % of its value at 1/16,
// i.e. the slope is linear in the amplitude; at full scale, where the
// modulation is as wide as the line, it has fallen below 70 % of that value. The whole
// design runs at its default parameters.
module tb_mod_amp_sweep;
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

  laser_spectroscopy_model #(.PEAK(PEAK), .NOISE(0), .MOD_COUPLING(0.02)) plant (
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
    real slope [5], ratio [5];
    real lo, hi, f, turns;
    int pp_lo, pp_hi;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    wr(7, {10'd0, 6'sd0, 16'sd0});          // scan gain 0: piezo = offset
    wr(0, 32'h0);                           // scan mode
    f = 4000.0;
    turns = f / FS;
    wr(1, 32'($rtoi(f / FS * 4294967296.0)));
    wr(3, 32'(-longint'(turns * 4294967296.0)));
    for (int k = 0; k < 5; k++) begin
      // amplitude 2^(k-4) of full scale
      wr(6, {10'd0, 6'(k - 4), 16'sd1});
      wr(8, 32'((int'(PEAK) - 4) * 16));
      samples(1500);
      measure(400, lo, pp_lo);
      wr(8, 32'((int'(PEAK) + 4) * 16));
      samples(1500);
      measure(400, hi, pp_hi);
      slope[k] = (hi - lo) / 8.0;
      ratio[k] = slope[k] / real'(1 << k);   // slope per unit of 1/16 amplitude
      $display("amplitude 1/%0d: error %8.1f / %8.1f, slope %8.2f per code, per unit amplitude %8.2f",
               16 >> k, lo, hi, slope[k], ratio[k]);
      check(slope[k] < 0.0, $sformatf("amplitude 1/%0d: slope negative (restoring)", 16 >> k));
      if (k > 0 && k < 4)
        check(slope[k] < slope[k-1], $sformatf("amplitude 1/%0d: slope grows with the amplitude", 16 >> k));
    end
    for (int k = 1; k < 3; k++)
      check(ratio[k] / ratio[0] > 0.9 && ratio[k] / ratio[0] < 1.1,
            $sformatf("amplitude 1/%0d: slope linear in the amplitude (%0.3f of the small-signal value)",
                      16 >> k, ratio[k] / ratio[0]));
    check(ratio[4] / ratio[0] < 0.7,
          $sformatf("full scale: slope per amplitude falls (%0.3f of the small-signal value)", ratio[4] / ratio[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
