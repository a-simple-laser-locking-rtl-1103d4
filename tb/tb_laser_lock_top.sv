// tb_laser_lock_top: end-to-end test of the whole lock at its default
// parameters (40 MHz clock, 318-tick loop, 4th-order 500 Hz filter,
// 1024-record monitor buffer), closed around a behavioural laser and
// spectroscopy model with one absorption peak.
//
// Sequence and what is checked:
//   1. scan mode: AO2 carries the 4 kHz modulation (frequency counted from
//      zero crossings), AO1 sweeps across the peak, the error signal changes
//      sign across the peak;
//   2. mode switch to lock near the peak: the laser is pulled onto the peak
//      and stays within 2 codes of it;
//   3. step switch on: the laser is knocked off the peak by the step and the
//      loop brings it back; the settling time is measured and must be below
//      20 ms; the same for the step switched off again;
//   3b. drift: the free-running laser frequency drifts by 30 codes over
//      20 ms; the loop keeps it within 3 codes of the line;
//   4. PID output limit: with the high limit set 30 codes below the lock point, AO1
//      sits at that limit; after the limit is lifted the lock returns;
//   5. monitor stream: every record read while the host drains it matches
//      the AO1 code of its sample, none is lost; when the host stops
//      draining, the buffer fills and records are counted as dropped;
//   6. the audio output carries the error signal;
//   7. switch back to scan mode: AO1 sweeps again.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_laser_lock_top;
  import laser_lock_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  adc_code_t ai;
  logic ai_sample, dac_update, mon_valid;
  logic mon_ready = 1'b0;
  dac_code_t ao1, ao2, audio_out;
  logic host_wr_en = 1'b0;
  logic [4:0] host_wr_addr = '0, host_rd_addr = '0;
  logic [31:0] host_wr_data = '0, host_rd_data;
  logic [47:0] mon_data;
  real disturbance = 0.0, detuning;
  int checks = 0, failures = 0;

  localparam real PEAK = 300.0;

  laser_lock_top dut (
    .clk, .rst_n, .ai, .ai_sample, .ao1, .ao2, .audio_out, .dac_update,
    .host_wr_en, .host_wr_addr, .host_wr_data, .host_rd_addr, .host_rd_data,
    .mon_data, .mon_valid, .mon_ready
  );

  laser_spectroscopy_model #(.PEAK(PEAK)) plant (
    .clk, .dac_update, .ao1, .ao2, .disturbance, .ai, .detuning
  );

  always #12.5 clk = ~clk;   // 40 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
    else $display("ok:   %s", what);
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk) begin host_wr_en <= 1'b1; host_wr_addr <= 5'(a); host_wr_data <= d; end
    @(posedge clk) host_wr_en <= 1'b0;
  endtask

  task automatic rd(input int a, output logic [31:0] r);
    @(negedge clk) host_rd_addr = 5'(a);
    #1 r = host_rd_data;
  endtask

  // wait n loop iterations (converter updates)
  task automatic samples(input int n);
    repeat (n) @(posedge clk iff dac_update);
  endtask

  // mechanism counters
  int n_scan = 0, n_lock = 0, n_step = 0, n_limit = 0, n_overflow = 0;
  int n_rescan = 0, n_records = 0, n_audio = 0, n_drift = 0;

  // ---- monitor reader: checks each record against the AO1 code ----
  int rec_bad = 0;
  int skip_n = 0;     // records that predate a host stall are not compared
  always @(posedge clk) begin
    if (rst_n && mon_valid && mon_ready && skip_n > 0) skip_n--;
    else if (rst_n && mon_valid && mon_ready) begin
      int p, e;
      p = int'($signed(mon_data[15:0]));
      e = (p + 8) >>> 4;
      if (e > 2047) e = 2047;
      if (e < -2048) e = -2048;
      if (e != int'(ao1)) rec_bad++;
      n_records++;
    end
  end

  // ---- modulation frequency from AO2 zero crossings ----
  int zc = 0;
  logic signed [11:0] ao2_prev = '0;
  always @(posedge clk) begin
    if (dac_update) begin
      #1;
      if (ao2_prev < 0 && ao2 >= 0) zc++;
      ao2_prev = ao2;
    end
  end

  initial begin : watchdog
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // samples until |detuning| stays below tol for 100 samples (max limit)
  task automatic settle(input real tol, input int limit, output int n);
    int n_in;
    n_in = 0; n = 0;
    while (n_in < 100 && n < limit) begin
      samples(1); n++;
      if (detuning < tol && detuning > -tol) n_in++; else n_in = 0;
    end
    n = n - 100;
  endtask

  localparam real FS = 40.0e6 / 318.0;

  initial begin
    int n, z0, amin, amax, emin, emax, settle_n, pass_before, rec0, lock_code;
    real dmax;
    logic [31:0] r;

    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);

    // ---- configuration ----
    wr(7,  {10'd0, -6'sd3, 16'sd1});         // scan gain 1/8: +-4096 (+-256 codes)
    wr(8,  32'(int'(PEAK) * 16));            // scan offset at the peak region
    wr(2,  32'd1365800);                     // 40 Hz scan (short test)
    wr(10, 32'sd20972);                      // kp = 0.02
    wr(11, 32'sd839);                        // ki = 0.0008 per sample
    wr(12, 32'sd0);                          // kd = 0
    wr(0,  32'h4);                           // scan mode, monitor on
    mon_ready <= 1'b1;

    // ---- 1. scan ----
    samples(200);
    z0 = zc; amin = 4096; amax = -4096; emin = 40000; emax = -40000;
    for (int i = 0; i < 3774; i++) begin    // 30 ms
      samples(1);
      if (int'(ao1) < amin) amin = int'(ao1);
      if (int'(ao1) > amax) amax = int'(ao1);
      rd(17, r);
      if (int'($signed(r)) < emin) emin = int'($signed(r));
      if (int'($signed(r)) > emax) emax = int'($signed(r));
    end
    check((zc - z0) >= 118 && (zc - z0) <= 122,
          $sformatf("modulation: %0d periods in 30 ms (4 kHz -> 120)", zc - z0));
    check(amax - amin > 400, $sformatf("scan sweeps AO1 over %0d..%0d", amin, amax));
    if (amax - amin > 400) n_scan++;
    check(emin < -200 && emax > 200, $sformatf("error signal crosses zero across the peak: %0d..%0d", emin, emax));

    // ---- 2. lock ----
    n = 0;
    while (!(detuning < 15.0 && detuning > -15.0) && n < 20000) begin samples(1); n++; end
    wr(0, 32'h5);                            // lock mode, monitor on
    n_lock++;
    settle(2.0, 10000, settle_n);
    check(settle_n < 9900, $sformatf("lock acquired after %0d samples", settle_n));
    samples(2000);
    dmax = 0.0;
    for (int i = 0; i < 2000; i++) begin
      samples(1);
      if (detuning > dmax) dmax = detuning;
      if (-detuning > dmax) dmax = -detuning;
    end
    check(dmax < 2.0, $sformatf("locked: |detuning| <= %0.2f codes over 16 ms", dmax));

    // ---- 3. step response ----
    wr(9, 32'(16 * 40));                     // step of 40 codes (one half width)
    wr(0, 32'h7);                            // step on
    samples(2);
    dmax = detuning;
    settle(2.0, 10000, settle_n);
    check(dmax > 20.0, $sformatf("step knocks the laser off by %0.1f codes", dmax));
    check(settle_n < 2516, $sformatf("step on: settles in %0.2f ms", real'(settle_n) * 1000.0 / FS));
    if (dmax > 20.0) n_step++;
    wr(0, 32'h5);                            // step off
    samples(2);
    dmax = detuning;
    settle(2.0, 10000, settle_n);
    check(dmax < -20.0 && settle_n < 2516,
          $sformatf("step off: %0.1f codes, settles in %0.2f ms", dmax, real'(settle_n) * 1000.0 / FS));
    if (dmax < -20.0) n_step++;

    // ---- 3b. drift: the free-running laser drifts 30 codes in 20 ms ----
    dmax = 0.0;
    for (int i = 0; i < 2516; i++) begin
      samples(1);
      disturbance = 30.0 * real'(i) / 2516.0;
      if (detuning > dmax) dmax = detuning;
      if (-detuning > dmax) dmax = -detuning;
    end
    check(dmax < 3.0, $sformatf("drift of 30 codes tracked within %0.2f codes", dmax));
    if (dmax < 3.0) n_drift++;
    samples(500);

    // ---- 4. PID output limit ----
    lock_code = int'(ao1);
    wr(13, {16'sh8000, 16'((lock_code - 30) * 16)});   // high limit 30 codes below the lock point
    samples(500);
    check(int'(ao1) == lock_code - 30, $sformatf("AO1 held at the output limit: %0d", ao1));
    check(detuning < -20.0, $sformatf("at the limit the laser is off the line (%0.1f codes)", detuning));
    if (int'(ao1) == lock_code - 30) n_limit++;
    wr(13, {16'sh8000, 16'sh7FFF});
    settle(2.0, 10000, settle_n);
    check(settle_n < 9900, $sformatf("lock regained after the limit is lifted (%0d samples)", settle_n));

    // ---- 6. audio output carries the error signal ----
    for (int i = 0; i < 50; i++) begin
      int e;
      samples(1);
      @(negedge clk);
      rd(17, r);
      e = (int'($signed(r)) + 8) >>> 4;
      if (e > 2047) e = 2047;
      if (e < -2048) e = -2048;
      if (e == int'(audio_out)) n_audio++;
    end
    check(n_audio == 50, $sformatf("audio output equals the error signal in %0d of 50 samples", n_audio));

    // ---- 5. monitor stream ----
    pass_before = n_records;
    check(n_records > 10000 && rec_bad == 0,
          $sformatf("monitor: %0d records, %0d mismatched", n_records, rec_bad));
    rd(19, r);
    check(r[31:16] == 16'd0, $sformatf("no record dropped while drained (%0d)", r[31:16]));
    mon_ready <= 1'b0;
    samples(1100);
    rd(19, r);
    check(r[15:0] == 16'd1024 && r[31:16] > 16'd50,
          $sformatf("host stalled: buffer full (%0d), %0d dropped", r[15:0], r[31:16]));
    if (r[31:16] > 0) n_overflow++;
    skip_n = 1024;
    mon_ready <= 1'b1;
    samples(10);
    check(rec_bad == 0, "records after the stall still match");

    // ---- 7. back to scan ----
    wr(0, 32'h4);
    amin = 4096; amax = -4096;
    for (int i = 0; i < 3200; i++) begin
      samples(1);
      if (int'(ao1) < amin) amin = int'(ao1);
      if (int'(ao1) > amax) amax = int'(ao1);
    end
    check(amax - amin > 400, $sformatf("scan resumes: AO1 %0d..%0d", amin, amax));
    if (amax - amin > 400) n_rescan++;

    // ---- mechanism coverage ----
    $display("mechanisms: scan=%0d lock=%0d step=%0d limit=%0d overflow=%0d rescan=%0d records=%0d",
             n_scan, n_lock, n_step, n_limit, n_overflow, n_rescan, n_records);
    check(n_scan > 0,     "mechanism: scan mode");
    check(n_lock > 0,     "mechanism: scan-to-lock switch");
    check(n_step > 0,     "mechanism: step switch");
    check(n_limit > 0,    "mechanism: PID output limit");
    check(n_drift > 0,    "mechanism: drift correction");
    check(n_overflow > 0, "mechanism: monitor buffer overflow");
    check(n_rescan > 0,   "mechanism: lock-to-scan switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
