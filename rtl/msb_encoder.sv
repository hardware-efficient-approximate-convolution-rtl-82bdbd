// msb_encoder: magnitude MSB position of a signed value.
//
// The position of the highest set bit of |x| is floor(log2|x|), which the unit uses as a
// cheap stand-in for the logarithmic size of an operand. A negative input is first
// negated (two's complement), then a priority encoder scans from the top bit down and
// returns the index of the first 1 as an MSB_W-bit number, as the paper describes for
// its first processing stage. The most negative value -2^(W-1) has magnitude 2^(W-1)
// when read as unsigned, so its MSB is W-1.
//
// Design choice, not from the paper: a zero input gives msb_o = 0 and raises zero_o, so
// that later stages can tell "exactly zero" apart from "one".
//
// Purely combinational; no clock.
module msb_encoder #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned MSB_W  = $clog2(DATA_W)
) (
  input  logic [DATA_W-1:0] value_i,
  output logic [MSB_W-1:0]  msb_o,
  output logic              zero_o
);

  logic [DATA_W-1:0] mag;

  always_comb begin
    mag = value_i[DATA_W-1] ? (~value_i + 1'b1) : value_i;
    msb_o  = '0;
    zero_o = (value_i == '0);
    // Priority encoder: the highest set bit wins.
    for (int unsigned b = 0; b < DATA_W; b++) begin
      if (mag[b]) msb_o = MSB_W'(b);
    end
  end

endmodule
