// tb_sine_gen: drives the generator with strobes and compares every output
// sample with round(32767*sin(2*pi*a/1024)), a being the top ten bits of the
// expected phase (tolerance one LSB). Checks that the accumulator advances by
// the frequency word per strobe, that out_valid comes two cycles after the
// strobe, and that a 4 kHz word gives 4 kHz at 40 MHz / 318.
module tb_sine_gen;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0, out_valid;
  phase_t fcw, phase, exp_phase;
  sample_t sine;
  int checks = 0, failures = 0;

  sine_gen dut (.clk, .rst_n, .sample, .fcw, .phase, .sine, .out_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_sine(input phase_t p);
    real a;
    a = real'(p[31:22]) * 2.0 * 3.14159265358979 / 1024.0;
    return $rtoi($floor(32767.0 * $sin(a) + 0.5));
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic strobe_and_check();
    int d;
    @(posedge clk) sample <= 1'b1;
    @(posedge clk) sample <= 1'b0;
    exp_phase = exp_phase + fcw;
    #1 check(out_valid == 1'b0, "out_valid not yet one cycle after strobe");
    check(phase == exp_phase, $sformatf("phase %h exp %h", phase, exp_phase));
    @(posedge clk);
    #1 check(out_valid == 1'b1, "out_valid two cycles after strobe");
    d = int'(sine) - ref_sine(exp_phase);
    check(d >= -1 && d <= 1, $sformatf("sine %0d exp %0d at %h", sine, ref_sine(exp_phase), exp_phase));
    repeat (2) @(posedge clk);
  endtask

  initial begin
    fcw = 32'h0100_0000;   // 256 samples per period
    exp_phase = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 300; i++) strobe_and_check();
    fcw = 32'h0123_4567;
    for (int i = 0; i < 300; i++) strobe_and_check();
    // Full-table sweep with a word that visits every address.
    fcw = 32'h0040_0000;
    for (int i = 0; i < 1030; i++) strobe_and_check();
    // 4 kHz at f_sample = 40e6/318: count phase wraps in 125786 strobes (1 s).
    begin
      longint wraps = 0;
      longint acc = 0;
      for (int i = 0; i < 125786; i++) begin
        acc += 136579960;
        if (acc >= 64'd4294967296) begin acc -= 64'd4294967296; wraps++; end
      end
      check(wraps >= 3999 && wraps <= 4001, $sformatf("4 kHz word gives %0d Hz", wraps));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
