// sample_timer: paces the FPGA loop.
//
// A free-running counter counts LOOP_TICKS clock cycles and raises `sample`
// for one cycle at the end of each count. Every other block of the lock
// advances only on that strobe, so the whole datapath runs at
// CLK_HZ / LOOP_TICKS samples per second. With the defaults (40 MHz clock,
// 318 ticks) one iteration lasts 7.95 us, i.e. about 125.8 kHz, which is the
// loop time and sample rate the original system reports. The 40 MHz clock is
// this design's assumption (it is the figure that makes 318 ticks equal
// 7.95 us). The first strobe comes LOOP_TICKS cycles after reset is released.
module sample_timer #(
  parameter int unsigned LOOP_TICKS = 318
) (
  input  logic clk,
  input  logic rst_n,
  output logic sample
);

  localparam int unsigned CW = $clog2(LOOP_TICKS);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      sample <= 1'b0;
    end else if (cnt == CW'(LOOP_TICKS - 1)) begin
      cnt    <= '0;
      sample <= 1'b1;
    end else begin
      cnt    <= cnt + 1'b1;
      sample <= 1'b0;
    end
  end

endmodule
