// coef_mux -- the control multiplexer of one filter tap.
//
// For tap COL it picks, from the products of the tap's MCM block, the one
// that belongs to the filter (fC or fG) and coefficient row k of the current
// prediction. With N_AVG-row averaging, rows k and k' share a coefficient
// when k / N_AVG == k' / N_AVG, so the multiplexer has 2 * 32 / N_AVG inputs
// (filter, row group); the group is the top bits of k. Which product feeds
// each input is fixed while the design is elaborated.
//
// Interface: prod from mcm_block, filt and k (the control bits), term = the
// selected product, coef(filt, k, COL) * x. Purely combinational.
// The multiplexer and its control follow the block diagram of the MCM
// architecture; the encoding of the control (filter bit plus row index) is
// this design's choice.
module coef_mux
  import intra_pkg::*;
#(
  parameter int unsigned BIT_DEPTH = 10,
  parameter int unsigned N_AVG     = 16,
  parameter int unsigned COL       = 0
) (
  input  logic signed [BIT_DEPTH+7:0] prod [-64:64],
  input  filt_e                       filt,
  input  logic [4:0]                  k,
  output logic signed [BIT_DEPTH+7:0] term
);

  localparam int unsigned PW  = BIT_DEPTH + 8;
  localparam int unsigned NG  = NUM_ROWS / N_AVG;  // row groups per filter
  localparam int unsigned GSH = $clog2(N_AVG);      // k >> GSH is the group

  logic signed [PW-1:0] opts [2*NG];

  for (genvar f = 0; f < 2; f++) begin : g_filt
    for (genvar g = 0; g < int'(NG); g++) begin : g_grp
      localparam int C = approx_coef(filt_e'(f), g * int'(N_AVG), int'(COL), int'(N_AVG));
      assign opts[f*NG + g] = prod[C];
    end
  end

  logic [4:0] grp;
  assign grp = k >> GSH;

  always_comb begin
    term = opts[(filt == FILT_FG ? NG : 0) + 32'(grp)];
  end

endmodule
