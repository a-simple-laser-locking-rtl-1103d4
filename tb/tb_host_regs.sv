// tb_host_regs: checks the reset values, writes every register with random
// data and reads it back over the bus, checks each control field the
// datapath sees, the read-only live signals and that writes to read-only
// addresses change nothing.
module tb_host_regs;
  import laser_lock_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  sample_t live_spec, live_err, live_piezo;
  logic [15:0] mon_level, mon_dropped;
  lock_ctrl_t ctrl;
  int checks = 0, failures = 0;

  host_regs dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data,
                 .live_spec, .live_err, .live_piezo, .mon_level, .mon_dropped, .ctrl);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk) begin wr_en <= 1'b1; wr_addr <= 5'(a); wr_data <= d; end
    @(posedge clk) wr_en <= 1'b0;
  endtask

  task automatic rd(input int a, output logic [31:0] r);
    rd_addr = 5'(a);
    #1 r = rd_data;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v [14];
    logic [31:0] masks [14];
    live_spec = -16'sd5; live_err = 16'sd77; live_piezo = -16'sd1000;
    mon_level = 16'd12; mon_dropped = 16'd3;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    #1;
    check(ctrl.mode == MODE_SCAN && !ctrl.step_on && !ctrl.mon_en, "reset: scan, step off");
    check(ctrl.mod_fcw == 32'd136579960 && ctrl.scan_fcw == 32'd136580, "reset: 4 kHz / 4 Hz");
    check(ctrl.mix_gain.shift == -6'sd15 && ctrl.ref_gain.mult == 16'sd1, "reset: gains");
    check(ctrl.out_high == 16'sh7FFF && ctrl.out_low == 16'sh8000, "reset: output range");
    masks = '{32'h7, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'h003F_FFFF, 32'h003F_FFFF,
              32'h003F_FFFF, 32'h003F_FFFF, 32'h0000_FFFF, 32'h0000_FFFF, 32'hFFFF_FFFF,
              32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF_FFFF};
    for (int round = 0; round < 20; round++) begin
      for (int a = 0; a < 14; a++) begin
        v[a] = $urandom & masks[a];
        wr(a, v[a]);
      end
      for (int a = 0; a < 14; a++) begin
        logic [31:0] r, e;
        rd(a, r);
        e = v[a];
        if (a == 8 || a == 9) e = {{16{v[a][15]}}, v[a][15:0]};
        if (a >= 4 && a <= 7) e = {10'd0, v[a][21:0]};
        check(r == e, $sformatf("reg %0d read %h exp %h", a, r, e));
      end
      check(ctrl.mode == lock_mode_e'(v[0][0]) && ctrl.step_on == v[0][1] && ctrl.mon_en == v[0][2], "ctrl bits");
      check(ctrl.mod_fcw == v[1] && ctrl.scan_fcw == v[2] && ctrl.ref_phase == v[3], "fcw/phase");
      check(ctrl.ref_gain.mult == v[4][15:0] && ctrl.ref_gain.shift == v[4][21:16], "ref gain");
      check(ctrl.mix_gain == gain_t'(v[5][21:0]) || (ctrl.mix_gain.mult == v[5][15:0] && ctrl.mix_gain.shift == v[5][21:16]), "mix gain");
      check(ctrl.mod_gain.mult == v[6][15:0] && ctrl.scan_gain.shift == v[7][21:16], "mod/scan gain");
      check(ctrl.scan_offset == v[8][15:0] && ctrl.step_size == v[9][15:0], "offset/step");
      check(ctrl.kp == v[10] && ctrl.ki == v[11] && ctrl.kd == v[12], "pid coefficients");
      check(ctrl.out_high == v[13][15:0] && ctrl.out_low == v[13][31:16], "output limits");
    end
    begin
      logic [31:0] r16, r17, r18, r19, r1;
      rd(16, r16); rd(17, r17); rd(18, r18); rd(19, r19);
      check(r16 == 32'hFFFF_FFFB && r17 == 32'd77 && r18 == 32'hFFFF_FC18, "live signals");
      check(r19 == {16'd3, 16'd12}, "monitor status");
      wr(17, 32'h1234);
      rd(17, r17); rd(1, r1);
      check(r17 == 32'd77 && r1 == v[1], "write to read-only address ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
