// angular_ctrl -- control word of an angular prediction row.
//
// For a directional mode and a row y of the block it returns the coefficient
// row k (the 1/32 fractional position) and the integer offset i0 of the
// first reference sample, both from the projected displacement
// pos = (y + 1) * intraPredAngle(mode): k = pos & 31, i0 = pos >> 5
// (arithmetic). intraPredAngle is the VVC table, wide-angle modes included.
// For horizontal modes (below 34) the same rule applies with rows and
// columns exchanged; arranging the reference array accordingly is left to
// the reference sample buffer, which is outside this design.
//
// Interface: mode (-14 .. 80), y (0 .. 63) in; k, i0 out, plus
// flags: dir_ok (a directional mode, i.e. not planar or DC and in range),
// waip (a wide-angle mode), hor (a horizontal-class mode). Combinational.
// That k and i0 depend on y and the mode is stated by the paper; the
// formulas and the angle table are those of the VVC standard.
module angular_ctrl
  import intra_pkg::*;
(
  input  logic signed [7:0]  mode,
  input  logic [5:0]         y,
  output logic [4:0]         k,
  output logic signed [12:0] i0,
  output logic               dir_ok,
  output logic               waip,
  output logic               hor
);

  logic signed [10:0] angle;   // intraPredAngle of the mode
  logic signed [17:0] pos;

  always_comb begin
    angle  = '0;
    dir_ok = 1'b0;
    waip   = 1'b0;
    hor    = 1'b0;
    // Case over every legal mode: a small ROM of the angle table.
    for (int m = -14; m <= 80; m++) begin
      if (int'(mode) == m && (m < 0 || m >= 2)) begin
        angle  = 11'(pred_angle(m));
        dir_ok = 1'b1;
        waip   = (m < 2) || (m > 66);
        hor    = (m < 34);
      end
    end
    pos = 18'($signed({1'b0, y}) + 18'sd1) * 18'(angle);
    k   = pos[4:0];
    i0  = 13'(pos >>> 5);
  end

endmodule
