// tb_sample_timer: checks that the loop strobe is one cycle wide and comes
// every LOOP_TICKS cycles (318 by default, 7.95 us at 40 MHz), and that the
// first strobe comes LOOP_TICKS cycles after reset.
module tb_sample_timer;
  localparam int unsigned TICKS = 318;
  logic clk = 1'b0, rst_n = 1'b0, sample;
  int checks = 0, failures = 0;

  sample_timer dut (.clk, .rst_n, .sample);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, last;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    cycles = 0; last = 0;
    // first strobe
    forever begin
      @(posedge clk); #1; cycles++;
      if (sample) break;
    end
    check(cycles == TICKS, $sformatf("first strobe after %0d cycles", cycles));
    for (int n = 0; n < 20; n++) begin
      int gap;
      gap = 0;
      @(posedge clk); #1; gap++;
      check(!sample, "strobe wider than one cycle");
      while (!sample) begin @(posedge clk); #1; gap++; end
      check(gap == TICKS, $sformatf("strobe gap %0d", gap));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
