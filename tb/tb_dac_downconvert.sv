// tb_dac_downconvert: random and edge-case 16-bit samples; the registered
// 12-bit code must be floor((x+8)/16) limited to [-2048, 2047], and must hold
// while in_valid is low.
module tb_dac_downconvert;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  sample_t in;
  dac_code_t code;
  int checks = 0, failures = 0;

  dac_downconvert dut (.clk, .rst_n, .in_valid, .in, .code);

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
    for (int i = 0; i < 3000; i++) begin
      case (i)
        0: in = 16'sh7FFF;  1: in = 16'sh8000;  2: in = 16'sh7FF7;
        3: in = 16'sh7FF8;  4: in = -16'sd8;    5: in = -16'sd9;
        default: in = 16'($urandom);
      endcase
      e = (int'(in) + 8) >>> 4;
      if (e > 2047) e = 2047;
      if (e < -2048) e = -2048;
      @(posedge clk) in_valid <= 1'b1;
      @(posedge clk) in_valid <= 1'b0;
      #1 check(int'(code) == e, $sformatf("%0d -> %0d exp %0d", in, code, e));
      in = 16'($urandom);
      @(posedge clk); #1;
      check(int'(code) == e, "code held without in_valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
