// sum_shift_clip -- the adder, right shift and clip stage of one predicted
// sample: p = Clip((t0 + t1 + t2 + t3 + 32) >> 6).
//
// The four tap products are added together with the rounding offset 32, the
// sum is shifted right arithmetically by 6 (the coefficients are in units of
// 1/64) and the result is clipped to the sample range 0 .. 2^BIT_DEPTH - 1.
// A negative sum can appear because fC has negative taps; a sum above the
// range can appear because fC overshoots and because approximated rows need
// not add up to 64. Purely combinational.
// The equation follows the paper; the sample bit depth (10, as in the usual
// VVC test conditions) is this design's choice.
module sum_shift_clip
  import intra_pkg::*;
#(
  parameter int unsigned BIT_DEPTH = 10
) (
  input  logic signed [BIT_DEPTH+7:0] term [NUM_TAPS],
  output logic [BIT_DEPTH-1:0]        pred
);

  localparam int unsigned SW        = BIT_DEPTH + 10;
  localparam int unsigned FRAC_BITS = 6;   // exact coefficient rows sum to 1 << 6
  localparam int unsigned ROUND_OFS = 32;  // rounding offset, 1 << (FRAC_BITS - 1)

  logic signed [SW-1:0] sum;
  logic signed [SW-1:0] shifted;

  always_comb begin
    sum = SW'(ROUND_OFS);
    for (int t = 0; t < int'(NUM_TAPS); t++) sum = sum + SW'(term[t]);
    shifted = sum >>> FRAC_BITS;
    if (shifted < 0)
      pred = '0;
    else if (shifted > SW'((1 << BIT_DEPTH) - 1))
      pred = '1;
    else
      pred = shifted[BIT_DEPTH-1:0];
  end

endmodule
