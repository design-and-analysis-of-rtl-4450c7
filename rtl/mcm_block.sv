// mcm_block -- multiplierless multiple-constant multiplication (MCM) of one
// reference sample.
//
// The block multiplies the reference sample x by every distinct coefficient
// that the (approximated) fC and fG filters use in the taps selected by
// COL_MASK, using only shifts, additions and negations. Each distinct
// magnitude is built once, as the canonical signed-digit (CSD) sum of shifted
// copies of x; a negative coefficient is the negation of its magnitude, so a
// value needed by several taps, rows or filters is computed only once.
// Coefficients 1 and -1 pass x (or -x) straight through and 0 gives 0: no
// adder is spent on them.
//
// In a single-sample prediction unit the block for r[i] serves tap i only
// (COL_MASK = 1 << i), as MCM 0..3 do. In a unit that predicts several
// samples of a row, r[j] is tap j-x of sample x, so its block serves the
// union of those taps and shares its adders across the samples.
//
// Interface: prod[c] = c * x for every coefficient c the block serves, 0 at
// the indices of coefficients it does not serve. Purely combinational.
//
// The coefficient sets follow the approximation of the design (N_AVG rows
// averaged per run, N_AVG = 1 for the exact table). The adder graphs of the
// original blocks came from an MCM synthesis heuristic and are not given in
// full; the CSD form here is this design's own, simpler choice.
module mcm_block
  import intra_pkg::*;
#(
  parameter int unsigned BIT_DEPTH = 10,
  parameter int unsigned N_AVG     = 16,
  parameter logic [3:0]  COL_MASK  = 4'b1111
) (
  input  logic [BIT_DEPTH-1:0]        x,
  output logic signed [BIT_DEPTH+7:0] prod [-64:64]
);

  localparam int unsigned PW = BIT_DEPTH + 8;

  // Bit c + 64 is set when the signed coefficient c is used by a served tap.
  // Rows of one averaging run share their coefficient, so one row per run
  // is enough.
  function automatic logic [128:0] used_set();
    logic [128:0] u;
    u = '0;
    for (int f = 0; f < 2; f++)
      for (int k = 0; k < int'(NUM_ROWS); k += int'(N_AVG))
        for (int t = 0; t < int'(NUM_TAPS); t++)
          if (COL_MASK[t]) u[approx_coef(filt_e'(f), k, t, int'(N_AVG)) + 64] = 1'b1;
    return u;
  endfunction

  localparam logic [128:0] USED = used_set();

  function automatic bit coef_used(int c);
    return USED[c + 64];
  endfunction

  logic signed [PW-1:0] xs;
  assign xs = PW'($signed({1'b0, x}));

  // One shift-and-add network per distinct magnitude m >= 2.
  logic signed [PW-1:0] mag [2:64];

  for (genvar m = 2; m <= 64; m++) begin : g_mag
    if (coef_used(m) || coef_used(-m)) begin : g_used
      always_comb begin
        mag[m] = '0;
        for (int j = 0; j < 8; j++) begin
          if (csd_digit(m, j) == 1)       mag[m] = mag[m] + (xs <<< j);
          else if (csd_digit(m, j) == -1) mag[m] = mag[m] - (xs <<< j);
        end
      end
    end else begin : g_unused
      assign mag[m] = '0;
    end
  end

  for (genvar c = -64; c <= 64; c++) begin : g_prod
    if (c == 0) begin : g_zero
      assign prod[c] = '0;
    end else if (!coef_used(c)) begin : g_none
      assign prod[c] = '0;
    end else if (c == 1) begin : g_one
      assign prod[c] = xs;
    end else if (c == -1) begin : g_mone
      assign prod[c] = -xs;
    end else if (c > 0) begin : g_pos
      assign prod[c] = mag[c];
    end else begin : g_neg
      assign prod[c] = -mag[-c];
    end
  end

  initial assert (valid_n_avg(int'(N_AVG)))
    else $error("mcm_block: N_AVG must be 1, 2, 4, 8, 16 or 32");

endmodule
