// pred_unit -- one angular prediction unit of the MCM architecture.
//
// It predicts SAMPLES horizontally adjacent samples of one row of a block.
// All of them use the same filter and the same coefficient row k (both
// depend only on the row and the mode), and sample x reads the reference
// window entries ref_win[x .. x+3]. Each window entry j goes through one
// mcm_block that serves the taps it plays for the samples that read it
// (tap j - x for sample x), so a reference shared by several samples is
// multiplied once. For every sample and tap a coef_mux picks the product the
// control bits (filt, k) ask for, and a sum_shift_clip stage forms the sample.
// With SAMPLES = 1 this is the single-sample unit (MCM 0..3, four
// multiplexers, adder, shift, clip); with SAMPLES > 1 it is the parallel
// unit in which MCM blocks feed several samples.
//
// Interface: ref_win[0 .. SAMPLES+2] = r[i0 + xb .. i0 + xb + SAMPLES + 2]
// for the unit's first column xb, filt and k as control, pred[x] the
// prediction of column xb + x. Purely combinational; the top registers it.
// The structure follows the paper's block diagrams. That all samples of a
// unit lie in one row and share one control word is this design's reading
// of the single control line drawn for the parallel unit.
module pred_unit
  import intra_pkg::*;
#(
  parameter int unsigned BIT_DEPTH = 10,
  parameter int unsigned N_AVG     = 16,
  parameter int unsigned SAMPLES   = 1
) (
  input  logic [BIT_DEPTH-1:0] ref_win [SAMPLES+3],
  input  filt_e                filt,
  input  logic [4:0]           k,
  output logic [BIT_DEPTH-1:0] pred    [SAMPLES]
);

  localparam int unsigned PW   = BIT_DEPTH + 8;
  localparam int unsigned NREF = SAMPLES + 3;

  // Taps that window entry j plays: tap t for sample j - t, if it exists.
  function automatic logic [3:0] col_mask(int j);
    logic [3:0] m;
    m = '0;
    for (int t = 0; t < 4; t++)
      if (j - t >= 0 && j - t < int'(SAMPLES)) m[t] = 1'b1;
    return m;
  endfunction

  logic signed [PW-1:0] prod [NREF][-64:64];

  for (genvar j = 0; j < int'(NREF); j++) begin : g_mcm
    mcm_block #(
      .BIT_DEPTH(BIT_DEPTH),
      .N_AVG    (N_AVG),
      .COL_MASK (col_mask(j))
    ) u_mcm (
      .x   (ref_win[j]),
      .prod(prod[j])
    );
  end

  for (genvar x = 0; x < int'(SAMPLES); x++) begin : g_smp
    logic signed [PW-1:0] term [NUM_TAPS];
    for (genvar t = 0; t < int'(NUM_TAPS); t++) begin : g_tap
      coef_mux #(
        .BIT_DEPTH(BIT_DEPTH),
        .N_AVG    (N_AVG),
        .COL      (t)
      ) u_mux (
        .prod(prod[x+t]),
        .filt(filt),
        .k   (k),
        .term(term[t])
      );
    end
    sum_shift_clip #(.BIT_DEPTH(BIT_DEPTH)) u_ssc (
      .term(term),
      .pred(pred[x])
    );
  end

endmodule
