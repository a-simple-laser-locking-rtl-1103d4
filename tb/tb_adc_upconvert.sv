// tb_adc_upconvert: random 12-bit codes; one cycle after the strobe the
// 16-bit sample must be code*16, held until the next strobe.
module tb_adc_upconvert;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0, out_valid;
  adc_code_t ai;
  sample_t spec;
  int checks = 0, failures = 0;

  adc_upconvert dut (.clk, .rst_n, .sample, .ai, .spec, .out_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 2000; i++) begin
      ai = (i == 0) ? 12'sh7FF : (i == 1) ? 12'sh800 : 12'($urandom);
      e  = int'(ai) * 16;
      @(posedge clk) sample <= 1'b1;
      @(posedge clk) sample <= 1'b0;
      #1 check(out_valid, "valid one cycle after strobe");
      check(int'(spec) == e, $sformatf("code %0d -> %0d exp %0d", ai, spec, e));
      ai = 12'($urandom);
      @(posedge clk); #1;
      check(int'(spec) == e, "held between strobes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
