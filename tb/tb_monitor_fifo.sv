// tb_monitor_fifo: pushes records while the host reads with a random ready
// and checks that they come out complete and in order; then fills the buffer
// without reading and checks the level stops at DEPTH and every further
// record is counted as dropped; checks that nothing is pushed while the
// monitor is disabled. Uses a 16-entry buffer.
module tb_monitor_fifo;
  import laser_lock_pkg::*;
  localparam int unsigned DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, push = 1'b0, rd_valid, rd_ready = 1'b0;
  sample_t spec, err, piezo;
  logic [47:0] rd_data;
  logic [15:0] level, dropped;
  int checks = 0, failures = 0;

  monitor_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .enable, .push, .spec, .err, .piezo,
                                     .rd_data, .rd_valid, .rd_ready, .level, .dropped);

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

  logic [47:0] q[$];
  int n_in = 0, n_out = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // disabled: pushes ignored
    repeat (5) begin
      @(posedge clk) push <= 1'b1;
      @(posedge clk) push <= 1'b0;
    end
    #1 check(level == 0 && !rd_valid, "nothing stored while disabled");
    enable <= 1'b1;
    // streaming: push every 3rd cycle, read with random ready
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      push = (c % 3 == 0);
      spec = 16'($urandom); err = 16'($urandom); piezo = 16'($urandom);
      rd_ready = ($urandom_range(0, 1) == 1);
      if (push && level < DEPTH) q.push_back({spec, err, piezo});
      if (rd_valid && rd_ready) begin
        logic [47:0] e;
        e = q.pop_front();
        check(rd_data == e, $sformatf("record %0d: %h exp %h", n_out, rd_data, e));
        n_out++;
      end
      @(posedge clk);
    end
    #1 push = 1'b0; rd_ready = 1'b0;
    // drain
    while (rd_valid) begin
      @(negedge clk);
      rd_ready = 1'b1;
      check(rd_data == q.pop_front(), "drain order");
      @(posedge clk);
      #1;
    end
    @(negedge clk) rd_ready = 1'b0;
    check(q.size() == 0 && level == 0, "buffer empty after drain");
    check(dropped == 0, "nothing dropped while the host kept up");
    // overflow
    for (int i = 0; i < DEPTH + 5; i++) begin
      @(negedge clk) push = 1'b1;
      @(negedge clk) push = 1'b0;
    end
    check(level == DEPTH, $sformatf("level stops at depth: %0d", level));
    check(dropped == 5, $sformatf("dropped %0d exp 5", dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
