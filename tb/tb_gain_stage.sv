// tb_gain_stage: random samples, multipliers and shifts for a 16-bit and a
// 32-bit input stage; the output one cycle after in_valid must equal
// saturate(in*mult*2^shift) worked out with 64-bit integers here.
module tb_gain_stage;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, vin = 1'b0, v16, v32;
  logic signed [15:0] in16;
  logic signed [31:0] in32;
  gain_t g16, g32;
  sample_t o16, o32;
  int checks = 0, failures = 0;

  gain_stage #(.IN_W(16)) dut16 (.clk, .rst_n, .in_valid(vin), .in(in16), .gain(g16), .out(o16), .out_valid(v16));
  gain_stage #(.IN_W(32)) dut32 (.clk, .rst_n, .in_valid(vin), .in(in32), .gain(g32), .out(o32), .out_valid(v32));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expect_gain(input longint x, input gain_t g);
    longint p;
    int s;
    p = x * longint'(g.mult);
    s = int'(g.shift);
    if (s < 0) p = p >>> (-s);
    else begin
      // saturate before the shift can overflow 64 bits
      for (int k = 0; k < s; k++) begin
        p = p * 2;
        if (p > 64'sd1000000000 || p < -64'sd1000000000) break;
      end
    end
    if (p > 32767) return 32767;
    if (p < -32768) return -32768;
    return int'(p);
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e16, e32;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 3000; i++) begin
      in16 = 16'($urandom);
      in32 = 32'($urandom);
      g16.mult  = (i % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 40)) - 16'sd20;
      g16.shift = 6'($urandom_range(0, 30)) - 6'sd20;
      g32.mult  = 16'($urandom_range(0, 20)) - 16'sd10;
      g32.shift = -6'($urandom_range(10, 31));
      if (i % 7 == 0) begin g16 = '{mult: 16'sd1, shift: 6'sd0}; end
      e16 = expect_gain(longint'(in16), g16);
      e32 = expect_gain(longint'(in32), g32);
      @(posedge clk) vin <= 1'b1;
      @(posedge clk) vin <= 1'b0;
      #1;
      check(v16 && v32, "out_valid one cycle after in_valid");
      check(int'(o16) == e16, $sformatf("16: %0d*%0d*2^%0d = %0d exp %0d", in16, g16.mult, g16.shift, o16, e16));
      check(int'(o32) == e32, $sformatf("32: %0d*%0d*2^%0d = %0d exp %0d", in32, g32.mult, g32.shift, o32, e32));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
