// host_regs: the control registers through which the host computer runs the
// lock.
//
// Every setting of the operator interface is a 32-bit register here; the
// block presents them to the datapath as one `lock_ctrl_t` word. The host
// also reads back the live spectroscopy, error and piezo signals and the
// state of the monitor FIFO. The bus is a plain synchronous one: a write
// takes effect at the clock edge where `wr_en` is high; `rd_data` is the
// combinational value of the register at `rd_addr`.
//
// Register map (word addresses):
//   0  CTRL        bit0 mode (0 scan, 1 lock), bit1 step on, bit2 monitor on
//   1  MOD_FCW     modulation generator frequency word
//   2  SCAN_FCW    scan generator frequency word
//   3  REF_PHASE   demodulation phase, 2^32 = one turn
//   4  REF_GAIN    [15:0] multiplier, [21:16] shift (signed)   -- also 5..7
//   5  MIX_GAIN    gain after the multiplier
//   6  MOD_GAIN    gain in front of AO2
//   7  SCAN_GAIN   gain on the scan generator
//   8  SCAN_OFFSET [15:0] offset added to the scan
//   9  STEP_SIZE   [15:0] value added by the step switch
//   10 KP, 11 KI, 12 KD   PID coefficients, 20 fractional bits
//   13 OUT_LIMITS  [15:0] PID output high, [31:16] PID output low
//   16 SPEC, 17 ERR, 18 PIEZO   live signals (read only, sign-extended)
//   19 MON_STATUS  [15:0] FIFO words held, [31:16] samples dropped (read only)
// The paper says which settings exist and that the host sets them; the bus,
// the map, the encodings and the reset values are this design's choices.
// Reset values: scan mode, step and monitor off, 4 kHz modulation and 4 Hz
// scan at the default sample rate, unit gains except the mixer gain
// (2^-15, which brings the 32-bit product back to 16 bits), PID off, full
// output range.
module host_regs
  import laser_lock_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [4:0]  wr_addr,
  input  logic [31:0] wr_data,
  input  logic [4:0]  rd_addr,
  output logic [31:0] rd_data,
  input  sample_t     live_spec,
  input  sample_t     live_err,
  input  sample_t     live_piezo,
  input  logic [15:0] mon_level,
  input  logic [15:0] mon_dropped,
  output lock_ctrl_t  ctrl
);

  typedef enum logic [4:0] {
    A_CTRL      = 5'd0,
    A_MOD_FCW   = 5'd1,
    A_SCAN_FCW  = 5'd2,
    A_REF_PHASE = 5'd3,
    A_REF_GAIN  = 5'd4,
    A_MIX_GAIN  = 5'd5,
    A_MOD_GAIN  = 5'd6,
    A_SCAN_GAIN = 5'd7,
    A_OFFSET    = 5'd8,
    A_STEP      = 5'd9,
    A_KP        = 5'd10,
    A_KI        = 5'd11,
    A_KD        = 5'd12,
    A_LIMITS    = 5'd13,
    A_SPEC      = 5'd16,
    A_ERR       = 5'd17,
    A_PIEZO     = 5'd18,
    A_MON       = 5'd19
  } reg_addr_e;

  localparam gain_t UNITY = '{mult: 16'sd1, shift: 6'sd0};

  function automatic gain_t to_gain(input logic [31:0] d);
    return '{mult: d[15:0], shift: d[21:16]};
  endfunction

  function automatic logic [31:0] from_gain(input gain_t g);
    return {10'd0, g.shift, g.mult};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl.mode        <= MODE_SCAN;
      ctrl.step_on     <= 1'b0;
      ctrl.mon_en      <= 1'b0;
      ctrl.mod_fcw     <= 32'd136579960;   // 4 kHz at 40 MHz / 318
      ctrl.scan_fcw    <= 32'd136580;      // 4 Hz
      ctrl.ref_phase   <= '0;
      ctrl.ref_gain    <= UNITY;
      ctrl.mix_gain    <= '{mult: 16'sd1, shift: -6'sd15};
      ctrl.mod_gain    <= UNITY;
      ctrl.scan_gain   <= UNITY;
      ctrl.scan_offset <= '0;
      ctrl.step_size   <= '0;
      ctrl.kp          <= '0;
      ctrl.ki          <= '0;
      ctrl.kd          <= '0;
      ctrl.out_high    <= 16'sh7FFF;
      ctrl.out_low     <= 16'sh8000;
    end else if (wr_en) begin
      unique case (wr_addr)
        A_CTRL: begin
          ctrl.mode    <= lock_mode_e'(wr_data[0]);
          ctrl.step_on <= wr_data[1];
          ctrl.mon_en  <= wr_data[2];
        end
        A_MOD_FCW:   ctrl.mod_fcw     <= wr_data;
        A_SCAN_FCW:  ctrl.scan_fcw    <= wr_data;
        A_REF_PHASE: ctrl.ref_phase   <= wr_data;
        A_REF_GAIN:  ctrl.ref_gain    <= to_gain(wr_data);
        A_MIX_GAIN:  ctrl.mix_gain    <= to_gain(wr_data);
        A_MOD_GAIN:  ctrl.mod_gain    <= to_gain(wr_data);
        A_SCAN_GAIN: ctrl.scan_gain   <= to_gain(wr_data);
        A_OFFSET:    ctrl.scan_offset <= wr_data[15:0];
        A_STEP:      ctrl.step_size   <= wr_data[15:0];
        A_KP:        ctrl.kp          <= wr_data;
        A_KI:        ctrl.ki          <= wr_data;
        A_KD:        ctrl.kd          <= wr_data;
        A_LIMITS: begin
          ctrl.out_high <= wr_data[15:0];
          ctrl.out_low  <= wr_data[31:16];
        end
        default: ;   // read-only or unused address: ignored
      endcase
    end
  end

  always_comb begin
    unique case (rd_addr)
      A_CTRL:      rd_data = {29'd0, ctrl.mon_en, ctrl.step_on, ctrl.mode};
      A_MOD_FCW:   rd_data = ctrl.mod_fcw;
      A_SCAN_FCW:  rd_data = ctrl.scan_fcw;
      A_REF_PHASE: rd_data = ctrl.ref_phase;
      A_REF_GAIN:  rd_data = from_gain(ctrl.ref_gain);
      A_MIX_GAIN:  rd_data = from_gain(ctrl.mix_gain);
      A_MOD_GAIN:  rd_data = from_gain(ctrl.mod_gain);
      A_SCAN_GAIN: rd_data = from_gain(ctrl.scan_gain);
      A_OFFSET:    rd_data = 32'(ctrl.scan_offset);
      A_STEP:      rd_data = 32'(ctrl.step_size);
      A_KP:        rd_data = ctrl.kp;
      A_KI:        rd_data = ctrl.ki;
      A_KD:        rd_data = ctrl.kd;
      A_LIMITS:    rd_data = {ctrl.out_low, ctrl.out_high};
      A_SPEC:      rd_data = 32'(live_spec);
      A_ERR:       rd_data = 32'(live_err);
      A_PIEZO:     rd_data = 32'(live_piezo);
      A_MON:       rd_data = {mon_dropped, mon_level};
      default:     rd_data = '0;
    endcase
  end

endmodule
