// monitor_fifo: carries the spectroscopy, error and piezo signals from the
// FPGA loop to the host computer.
//
// While `enable` is high, every loop iteration (`push`) writes one 48-bit
// record {spectroscopy, error, piezo} into a DEPTH-entry first-in first-out
// buffer. The host drains it through a valid/ready port: a record leaves at
// a clock edge where `rd_valid` and `rd_ready` are both high. The loop never
// waits for the host: a record that finds the buffer full is dropped and
// counted in `dropped` (saturating), so a slow host loses samples but never
// disturbs the lock. `level` is the number of records held.
// The paper says these three signals go to the host; the buffer, its depth
// and the drop policy are this design's choices. Records come out in the
// order they went in; `rd_data` is the oldest record whenever `rd_valid`.
module monitor_fifo
  import laser_lock_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enable,
  input  logic                      push,
  input  sample_t                   spec,
  input  sample_t                   err,
  input  sample_t                   piezo,
  output logic [3*SAMPLE_W-1:0]     rd_data,
  output logic                      rd_valid,
  input  logic                      rd_ready,
  output logic [15:0]               level,
  output logic [15:0]               dropped
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [3*SAMPLE_W-1:0] mem [DEPTH];
  logic [AW:0]           wr_ptr, rd_ptr;
  logic                  full, empty, do_wr, do_rd;
  logic [AW:0]           count;

  assign empty  = (wr_ptr == rd_ptr);
  assign full   = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign do_wr  = enable && push && !full;
  assign do_rd  = rd_valid && rd_ready;

  assign rd_valid = !empty;
  assign rd_data  = mem[rd_ptr[AW-1:0]];
  assign count    = wr_ptr - rd_ptr;
  assign level    = 16'(count);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= {spec, err, piezo};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      dropped <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (enable && push && full && dropped != 16'hFFFF) dropped <= dropped + 1'b1;
    end
  end

  // The buffer never holds more than DEPTH records.
  a_level : assert property (@(posedge clk) disable iff (!rst_n) level <= 16'(DEPTH));

endmodule
