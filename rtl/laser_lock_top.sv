// laser_lock_top: FPGA laser frequency lock (modulation, lock-in detection,
// low-pass filter, PID feedback, scan and step test), all blocks wired.
//
// Once per loop iteration (every LOOP_TICKS clocks, 7.95 us by default) the
// lock reads one 12-bit sample of the spectroscopy signal from the analog
// input AI and updates its three analog outputs:
//   * AO2 drives the laser current driver with a sine modulation (4 kHz by
//     default) from the modulation generator, through a gain block;
//   * the spectroscopy sample, widened to 16 bits, is multiplied with a copy
//     of the modulation shifted by the phase theta (phase block, gain), the
//     product is scaled (gain) and low-pass filtered (4th-order Butterworth,
//     500 Hz): the result is the error signal;
//   * AO1 drives the piezo driver. In scan mode it carries the scan: a second
//     sine generator (4 Hz by default), gain, plus an offset. In lock mode it
//     carries the PID controller's answer to the error signal. The step
//     switch can add a fixed value to it to test the step response;
//   * the audio output carries the error signal for an oscilloscope.
// Every iteration also offers {spectroscopy, error, piezo} to the host
// through the monitor FIFO, and the host sets every parameter through the
// register bus of host_regs (see that file for the map).
//
// Timing inside one iteration (cycles after the `sample` strobe): input
// captured 1, generators 2, gains 3, product 4, scaled product 5, filter 8,
// PID 9, piezo 10, all converter codes 11. `dac_update` pulses when the three
// output codes change. The converters, the drivers, the laser, the
// spectroscopy and the host link are outside this design; their signals are
// the ports below. The dataflow follows the paper; the pipeline, widths and
// the register bus are this design's choices.
module laser_lock_top
  import laser_lock_pkg::*;
#(
  parameter int unsigned LOOP_TICKS   = 318,
  parameter int unsigned CLK_HZ       = 40_000_000,
  parameter int unsigned FILTER_ORDER = 4,
  parameter int unsigned FILTER_FC_HZ = 500,
  parameter int unsigned MON_DEPTH    = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // analog input AI (spectroscopy signal), 12-bit two's complement
  input  adc_code_t             ai,
  output logic                  ai_sample,     // converter read strobe
  // analog outputs, 12-bit two's complement codes
  output dac_code_t             ao1,           // piezo driver
  output dac_code_t             ao2,           // current driver (modulation)
  output dac_code_t             audio_out,     // error signal monitor
  output logic                  dac_update,
  // host register bus
  input  logic                  host_wr_en,
  input  logic [4:0]            host_wr_addr,
  input  logic [31:0]           host_wr_data,
  input  logic [4:0]            host_rd_addr,
  output logic [31:0]           host_rd_data,
  // monitor stream to the host
  output logic [3*SAMPLE_W-1:0] mon_data,
  output logic                  mon_valid,
  input  logic                  mon_ready
);

  lock_ctrl_t ctrl;

  logic    sample;
  sample_t spec, mod_sine, ref_sine, scan_sine, ref_w, mod_w, scan_w;
  sample_t mixed, err, pid_u, piezo, scan_piezo;
  phase_t  mod_phase, scan_phase;
  logic    spec_v, mod_v, scan_v, ref_v, mod_gv, scan_gv, prod_v, mixed_v;
  logic    err_v, pid_v, piezo_v;
  logic signed [2*SAMPLE_W-1:0] prod;
  logic [15:0] mon_level, mon_dropped;

  assign ai_sample = sample;

  sample_timer #(.LOOP_TICKS(LOOP_TICKS)) u_timer (
    .clk, .rst_n, .sample
  );

  adc_upconvert u_adc (
    .clk, .rst_n, .sample, .ai, .spec, .out_valid(spec_v)
  );

  // ---- modulation generator, phase block and reference gain ----
  sine_gen u_mod_gen (
    .clk, .rst_n, .sample, .fcw(ctrl.mod_fcw),
    .phase(mod_phase), .sine(mod_sine), .out_valid(mod_v)
  );

  phase_shifter u_phase (
    .clk, .phase(mod_phase), .theta(ctrl.ref_phase), .sine_shifted(ref_sine)
  );

  gain_stage u_ref_gain (
    .clk, .rst_n, .in_valid(mod_v), .in(ref_sine), .gain(ctrl.ref_gain),
    .out(ref_w), .out_valid(ref_v)
  );

  gain_stage u_mod_gain (
    .clk, .rst_n, .in_valid(mod_v), .in(mod_sine), .gain(ctrl.mod_gain),
    .out(mod_w), .out_valid(mod_gv)
  );

  // ---- demodulation: multiplier, gain, low-pass filter ----
  mixer u_mixer (
    .clk, .rst_n, .in_valid(ref_v), .a(spec), .b(ref_w),
    .prod, .out_valid(prod_v)
  );

  gain_stage #(.IN_W(2*SAMPLE_W)) u_mix_gain (
    .clk, .rst_n, .in_valid(prod_v), .in(prod), .gain(ctrl.mix_gain),
    .out(mixed), .out_valid(mixed_v)
  );

  lowpass_filter #(
    .ORDER(FILTER_ORDER), .FC_HZ(FILTER_FC_HZ),
    .CLK_HZ(CLK_HZ), .LOOP_TICKS(LOOP_TICKS)
  ) u_lpf (
    .clk, .rst_n, .in_valid(mixed_v), .in(mixed), .out(err), .out_valid(err_v)
  );

  // ---- feedback ----
  pid_controller u_pid (
    .clk, .rst_n,
    .enable   (ctrl.mode == MODE_LOCK),
    .in_valid (err_v),
    .e        (err),
    .kp       (ctrl.kp),
    .ki       (ctrl.ki),
    .kd       (ctrl.kd),
    .out_high (ctrl.out_high),
    .out_low  (ctrl.out_low),
    .preload  (scan_piezo),
    .u        (pid_u),
    .out_valid(pid_v)
  );

  // ---- scan generator and piezo output path ----
  sine_gen u_scan_gen (
    .clk, .rst_n, .sample, .fcw(ctrl.scan_fcw),
    .phase(scan_phase), .sine(scan_sine), .out_valid(scan_v)
  );

  gain_stage u_scan_gain (
    .clk, .rst_n, .in_valid(scan_v), .in(scan_sine), .gain(ctrl.scan_gain),
    .out(scan_w), .out_valid(scan_gv)
  );

  piezo_select u_piezo (
    .clk, .rst_n,
    .in_valid   (pid_v),
    .mode       (ctrl.mode),
    .step_on    (ctrl.step_on),
    .scan       (scan_w),
    .scan_offset(ctrl.scan_offset),
    .pid_out    (pid_u),
    .step_size  (ctrl.step_size),
    .scan_piezo (scan_piezo),
    .piezo      (piezo),
    .out_valid  (piezo_v)
  );

  // ---- converters: all outputs change together ----
  dac_downconvert u_dac_ao1 (
    .clk, .rst_n, .in_valid(piezo_v), .in(piezo), .code(ao1)
  );

  dac_downconvert u_dac_ao2 (
    .clk, .rst_n, .in_valid(piezo_v), .in(mod_w), .code(ao2)
  );

  dac_downconvert u_dac_audio (
    .clk, .rst_n, .in_valid(piezo_v), .in(err), .code(audio_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_update <= 1'b0;
    else        dac_update <= piezo_v;
  end

  // ---- host side ----
  monitor_fifo #(.DEPTH(MON_DEPTH)) u_mon (
    .clk, .rst_n,
    .enable  (ctrl.mon_en),
    .push    (piezo_v),
    .spec    (spec),
    .err     (err),
    .piezo   (piezo),
    .rd_data (mon_data),
    .rd_valid(mon_valid),
    .rd_ready(mon_ready),
    .level   (mon_level),
    .dropped (mon_dropped)
  );

  host_regs u_regs (
    .clk, .rst_n,
    .wr_en      (host_wr_en),
    .wr_addr    (host_wr_addr),
    .wr_data    (host_wr_data),
    .rd_addr    (host_rd_addr),
    .rd_data    (host_rd_data),
    .live_spec  (spec),
    .live_err   (err),
    .live_piezo (piezo),
    .mon_level  (mon_level),
    .mon_dropped(mon_dropped),
    .ctrl       (ctrl)
  );

endmodule
