// tb_phase_shifter: random phases and shifts; the output one cycle later must
// be round(32767*sin(2*pi*a/1024)) with a the top ten bits of phase+theta
// (tolerance one LSB). Also checks quarter-turn shifts: sin -> cos.
module tb_phase_shifter;
  import laser_lock_pkg::*;
  logic clk = 1'b0;
  phase_t phase, theta;
  sample_t sine_shifted;
  int checks = 0, failures = 0;

  phase_shifter dut (.clk, .phase, .theta, .sine_shifted);

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    phase_t sum;
    for (int i = 0; i < 2000; i++) begin
      phase = $urandom;
      theta = (i < 1000) ? 32'($urandom) : 32'(i % 4) << 30;
      sum = phase + theta;
      @(posedge clk);
      #1;
      d = int'(sine_shifted) - ref_sine(sum);
      check(d >= -1 && d <= 1, $sformatf("shifted %0d exp %0d", sine_shifted, ref_sine(sum)));
    end
    // A shift of a quarter turn turns sin into cos.
    phase = 32'h0; theta = 32'h4000_0000;
    @(posedge clk); #1;
    check(sine_shifted == 16'sd32767, $sformatf("cos(0) = %0d", sine_shifted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
