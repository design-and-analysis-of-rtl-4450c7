// intra_pkg -- constants, types and elaboration-time functions shared by the
// VVC intra angular prediction datapath.
//
// It holds the two 32-row x 4-column luma interpolation filters of VVC: the
// DCT-based filter fC and the 4-tap smoothing (Gaussian) filter fG. Row k is
// the 1/32-sample fractional position, column i the tap applied to r[i0+x+i].
// approx_coef() gives the approximated table used by the accelerator: every
// column is cut into runs of n consecutive rows and each run is replaced by
// the average of its n entries, truncated toward zero (the rounding that the
// worked examples of the approximation reproduce, e.g. column 2 of fC,
// rows 16..31, averages 51.625 to 51 and column 0 averages -3.625 to -3).
// n = 1 leaves the table exact. All functions are meant to be evaluated while
// the design is elaborated; no table is held in a memory at run time.
// The filter entries are those of the VVC standard; the intraPredAngle table
// used by angular_ctrl is also taken from the standard.
package intra_pkg;

  // Which of the two interpolation filters a prediction uses.
  typedef enum logic {
    FILT_FC = 1'b0,   // DCT-based interpolation filter
    FILT_FG = 1'b1    // smoothing interpolation filter
  } filt_e;

  localparam int unsigned NUM_ROWS = 32;  // fractional positions k
  localparam int unsigned NUM_TAPS = 4;   // filter length

  localparam int FC_TAB [NUM_ROWS][NUM_TAPS] = '{
    '{ 0, 64,  0,  0}, '{-1, 63,  2,  0}, '{-2, 62,  4,  0}, '{-2, 60,  7, -1},
    '{-2, 58, 10, -2}, '{-3, 57, 12, -2}, '{-4, 56, 14, -2}, '{-4, 55, 15, -2},
    '{-4, 54, 16, -2}, '{-5, 53, 18, -2}, '{-6, 52, 20, -2}, '{-6, 49, 24, -3},
    '{-6, 46, 28, -4}, '{-5, 44, 29, -4}, '{-4, 42, 30, -4}, '{-4, 39, 33, -4},
    '{-4, 36, 36, -4}, '{-4, 33, 39, -4}, '{-4, 30, 42, -4}, '{-4, 29, 44, -5},
    '{-4, 28, 46, -6}, '{-3, 24, 49, -6}, '{-2, 20, 52, -6}, '{-2, 18, 53, -5},
    '{-2, 16, 54, -4}, '{-2, 15, 55, -4}, '{-2, 14, 56, -4}, '{-2, 12, 57, -3},
    '{-2, 10, 58, -2}, '{-1,  7, 60, -2}, '{ 0,  4, 62, -2}, '{ 0,  2, 63, -1}
  };

  // The smoothing filter is linear in k: row k is
  // {16 - k/2, 32 - k/2, 16 + k/2, k/2} with k/2 rounded down.
  function automatic int fg_coef(int k, int c);
    int h;
    h = k / 2;
    case (c)
      0:       return 16 - h;
      1:       return 32 - h;
      2:       return 16 + h;
      default: return h;
    endcase
  endfunction

  function automatic int exact_coef(filt_e f, int k, int c);
    return (f == FILT_FC) ? FC_TAB[k][c] : fg_coef(k, c);
  endfunction

  // Approximated coefficient of row k, tap c, for averaging runs of n rows.
  function automatic int approx_coef(filt_e f, int k, int c, int n);
    int base, sum;
    if (n <= 1) return exact_coef(f, k, c);
    base = (k / n) * n;
    sum  = 0;
    for (int r = 0; r < n; r++) sum += exact_coef(f, base + r, c);
    return sum / n;   // truncates toward zero
  endfunction

  // True when N_AVG is one of the supported run lengths (1 = exact table).
  function automatic bit valid_n_avg(int n);
    return (n == 1) || (n == 2) || (n == 4) || (n == 8) || (n == 16) || (n == 32);
  endfunction

  // Digit j (-1, 0 or +1) of the canonical signed-digit form of m >= 0.
  function automatic int csd_digit(int m, int j);
    int v, d;
    v = m;
    d = 0;
    for (int i = 0; i <= j; i++) begin
      if (v % 2 != 0) d = 2 - (v % 4);
      else            d = 0;
      v = (v - d) / 2;
    end
    return d;
  endfunction

  // intraPredAngle of a directional mode (VVC): modes 2..66 are the regular
  // angular modes, -14..-1 and 67..80 the wide-angle (WAIP) modes. 0 for
  // planar (0), DC (1) and anything out of range.
  function automatic int pred_angle(int mode);
    int a [17] = '{32, 29, 26, 23, 20, 18, 16, 14, 12, 10, 8, 6, 4, 3, 2, 1, 0};
    int w [14] = '{35, 39, 45, 51, 57, 64, 73, 86, 102, 128, 171, 256, 341, 512};
    if (mode >= -14 && mode <= -1) return w[-mode - 1];
    if (mode >= 2  && mode <= 18) return a[mode - 2];
    if (mode >= 19 && mode <= 34) return -a[34 - mode];
    if (mode >= 35 && mode <= 50) return -a[mode - 34];
    if (mode >= 51 && mode <= 66) return a[66 - mode];
    if (mode >= 67 && mode <= 80) return w[mode - 67];
    return 0;
  endfunction

endpackage
