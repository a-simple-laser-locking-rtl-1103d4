// tb_mixer: random signed 16-bit operands, including the extremes; the
// registered 32-bit product must equal a*b one cycle after in_valid.
module tb_mixer;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  sample_t a, b;
  logic signed [31:0] prod;
  int checks = 0, failures = 0;

  mixer dut (.clk, .rst_n, .in_valid, .a, .b, .prod, .out_valid);

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
    longint e;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 3000; i++) begin
      a = (i == 0) ? 16'sh8000 : 16'($urandom);
      b = (i == 0) ? 16'sh8000 : (i == 1) ? 16'sh7FFF : 16'($urandom);
      e = longint'(a) * longint'(b);
      @(posedge clk) in_valid <= 1'b1;
      @(posedge clk) in_valid <= 1'b0;
      #1 check(out_valid, "valid one cycle after in_valid");
      check(longint'(prod) == e, $sformatf("%0d*%0d = %0d exp %0d", a, b, prod, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
