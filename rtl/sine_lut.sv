// sine_lut: phase-to-amplitude converter shared by the sine generators and the
// phase block.
//
// The top LUT_ABITS bits of a phase word address a full period of a sine of
// amplitude 32767. Only a quarter period is stored (2^(LUT_ABITS-2) words);
// the other three quarters come from mirroring the address and negating the
// result. The table is computed at elaboration by an integer Taylor series
// (terms up to x^11 in Q30 arithmetic, error well below one output LSB), so
// no data file is needed: entry i holds round(32767 * sin(pi/2 * i / Q)),
// Q = 2^(LUT_ABITS-2). The output is registered: `sine` follows `phase` by
// one clock cycle. The table size is this design's choice; the paper only
// says the generators are digital sine generators.
module sine_lut
  import laser_lock_pkg::*;
#(
  parameter int unsigned ABITS = LUT_ABITS
) (
  input  logic    clk,
  input  phase_t  phase,
  output sample_t sine
);

  localparam int unsigned QBITS = ABITS - 2;
  localparam int unsigned QSIZE = 1 << QBITS;

  typedef logic [14:0] qword_t;

  // sin(x) for x in Q30 (0 <= x <= pi/2), result in Q30.
  function automatic longint sin_q30(input longint x);
    longint x2, term, acc;
    acc  = x;
    term = x;
    x2   = (x * x) >>> 30;
    for (int k = 1; k <= 5; k++) begin
      term = -(((term * x2) >>> 30) / longint'((2 * k) * (2 * k + 1)));
      acc  = acc + term;
    end
    return acc;
  endfunction

  function automatic qword_t quarter_entry(input int unsigned i);
    longint x, s;
    // pi/2 in Q30 is 1686629713.
    x = (64'sd1686629713 * longint'(i)) / longint'(QSIZE);
    s = sin_q30(x);
    return qword_t'((s * 32767 + (64'sd1 <<< 29)) >>> 30);
  endfunction

  function automatic logic [QSIZE*15-1:0] build_table();
    logic [QSIZE*15-1:0] t;
    for (int unsigned i = 0; i < QSIZE; i++) t[i*15 +: 15] = quarter_entry(i);
    return t;
  endfunction

  localparam logic [QSIZE*15-1:0] TABLE = build_table();

  logic [ABITS-1:0] addr;
  logic [QBITS-1:0] qaddr;
  logic             mirror, negate;
  qword_t           mag;

  assign addr   = phase[PHASE_W-1 -: ABITS];
  assign mirror = addr[QBITS];
  assign negate = addr[QBITS+1];

  always_comb begin
    qaddr = mirror ? QBITS'(~addr[QBITS-1:0] + 1'b1) : addr[QBITS-1:0];
    // The mirrored address of the first sample of quadrants 1 and 3 is the
    // peak, which the quarter table does not hold.
    if (mirror && addr[QBITS-1:0] == '0) mag = 15'd32767;
    else                                   mag = TABLE[qaddr*15 +: 15];
  end

  always_ff @(posedge clk) begin
    sine <= negate ? -sample_t'({1'b0, mag}) : sample_t'({1'b0, mag});
  end

endmodule
