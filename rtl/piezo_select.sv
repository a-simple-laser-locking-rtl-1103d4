// piezo_select: the piezo output path of the lock (offset adder, scan/lock
// switch, step adder and step on/off switch).
//
// In scan mode the piezo follows the scan: scan generator output (after its
// gain) plus the operator's offset. In lock mode it follows the PID output.
// The step switch, when on, adds a fixed value `step_size` to whichever
// signal was selected, which puts a sudden disturbance on the locked laser so
// that the step response of the loop can be measured. All three additions
// saturate at the 16-bit limits. The order of the blocks (offset before the
// scan/lock switch, step after it) follows the dataflow of the paper.
// `scan_piezo` (the scan before the switch) is also exported: the PID
// controller starts from it when the loop is closed.
// Timing: registered; `piezo` is valid with `out_valid`, one cycle after
// `in_valid`, and holds until the next valid input.
module piezo_select
  import laser_lock_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  lock_mode_e mode,
  input  logic       step_on,
  input  sample_t    scan,
  input  sample_t    scan_offset,
  input  sample_t    pid_out,
  input  sample_t    step_size,
  output sample_t    scan_piezo,
  output sample_t    piezo,
  output logic       out_valid
);

  sample_t selected, stepped;

  always_comb begin
    scan_piezo = sat16(64'(scan) + 64'(scan_offset));
    selected   = (mode == MODE_LOCK) ? pid_out : scan_piezo;
    stepped    = sat16(64'(selected) + 64'(step_size));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      piezo     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) piezo <= step_on ? stepped : selected;
    end
  end

endmodule
