// tb_piezo_select: random inputs in both modes with the step switch on and
// off; the registered piezo value must be
//   scan mode: sat(scan + offset), lock mode: PID output,
//   plus sat(... + step) when the step switch is on.
module tb_piezo_select;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, step_on, out_valid;
  lock_mode_e mode;
  sample_t scan, scan_offset, pid_out, step_size, scan_piezo, piezo;
  int checks = 0, failures = 0;

  piezo_select dut (.clk, .rst_n, .in_valid, .mode, .step_on, .scan, .scan_offset,
                    .pid_out, .step_size, .scan_piezo, .piezo, .out_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(input int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sp, sel, e;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 3000; i++) begin
      mode = lock_mode_e'(i % 2);
      step_on = (i % 4) >= 2;
      scan = 16'($urandom); scan_offset = 16'($urandom);
      pid_out = 16'($urandom); step_size = 16'($urandom);
      if (i % 5 == 0) begin scan_offset = '0; step_size = 16'($urandom_range(0, 1000)); end
      sp  = sat(int'(scan) + int'(scan_offset));
      sel = (mode == MODE_LOCK) ? int'(pid_out) : sp;
      e   = step_on ? sat(sel + int'(step_size)) : sel;
      #1 check(int'(scan_piezo) == sp, "scan_piezo");
      @(posedge clk) in_valid <= 1'b1;
      @(posedge clk) in_valid <= 1'b0;
      #1 check(out_valid, "valid one cycle after in_valid");
      check(int'(piezo) == e, $sformatf("mode %0d step %0d: %0d exp %0d", mode, step_on, piezo, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
