// tb_ref_pkg -- reference model used by the testbenches.
//
// It is written apart from the RTL: both filter tables are spelled out in
// full, the averaging is done with an explicit run sum, and the angle table
// lists every mode. prediction() evaluates
//   p = Clip((sum_i c_i * r_i + 32) >> 6)
// on plain integers.
package tb_ref_pkg;

  int FC [32][4] = '{
    '{ 0, 64,  0,  0}, '{-1, 63,  2,  0}, '{-2, 62,  4,  0}, '{-2, 60,  7, -1},
    '{-2, 58, 10, -2}, '{-3, 57, 12, -2}, '{-4, 56, 14, -2}, '{-4, 55, 15, -2},
    '{-4, 54, 16, -2}, '{-5, 53, 18, -2}, '{-6, 52, 20, -2}, '{-6, 49, 24, -3},
    '{-6, 46, 28, -4}, '{-5, 44, 29, -4}, '{-4, 42, 30, -4}, '{-4, 39, 33, -4},
    '{-4, 36, 36, -4}, '{-4, 33, 39, -4}, '{-4, 30, 42, -4}, '{-4, 29, 44, -5},
    '{-4, 28, 46, -6}, '{-3, 24, 49, -6}, '{-2, 20, 52, -6}, '{-2, 18, 53, -5},
    '{-2, 16, 54, -4}, '{-2, 15, 55, -4}, '{-2, 14, 56, -4}, '{-2, 12, 57, -3},
    '{-2, 10, 58, -2}, '{-1,  7, 60, -2}, '{ 0,  4, 62, -2}, '{ 0,  2, 63, -1}
  };

  int FG [32][4] = '{
    '{16, 32, 16,  0}, '{16, 32, 16,  0}, '{15, 31, 17,  1}, '{15, 31, 17,  1},
    '{14, 30, 18,  2}, '{14, 30, 18,  2}, '{13, 29, 19,  3}, '{13, 29, 19,  3},
    '{12, 28, 20,  4}, '{12, 28, 20,  4}, '{11, 27, 21,  5}, '{11, 27, 21,  5},
    '{10, 26, 22,  6}, '{10, 26, 22,  6}, '{ 9, 25, 23,  7}, '{ 9, 25, 23,  7},
    '{ 8, 24, 24,  8}, '{ 8, 24, 24,  8}, '{ 7, 23, 25,  9}, '{ 7, 23, 25,  9},
    '{ 6, 22, 26, 10}, '{ 6, 22, 26, 10}, '{ 5, 21, 27, 11}, '{ 5, 21, 27, 11},
    '{ 4, 20, 28, 12}, '{ 4, 20, 28, 12}, '{ 3, 19, 29, 13}, '{ 3, 19, 29, 13},
    '{ 2, 18, 30, 14}, '{ 2, 18, 30, 14}, '{ 1, 17, 31, 15}, '{ 1, 17, 31, 15}
  };

  // intraPredAngle for modes -14 .. 80 (index mode + 14); 0 for planar/DC.
  int ANGLE [95] = '{
    512, 341, 256, 171, 128, 102, 86, 73, 64, 57, 51, 45, 39, 35,   // -14..-1
    0, 0,                                                           // 0, 1
    32, 29, 26, 23, 20, 18, 16, 14, 12, 10, 8, 6, 4, 3, 2, 1, 0,    // 2..18
    -1, -2, -3, -4, -6, -8, -10, -12, -14, -16, -18, -20, -23, -26, -29, -32, // 19..34
    -29, -26, -23, -20, -18, -16, -14, -12, -10, -8, -6, -4, -3, -2, -1, 0,   // 35..50
    1, 2, 3, 4, 6, 8, 10, 12, 14, 16, 18, 20, 23, 26, 29, 32,       // 51..66
    35, 39, 45, 51, 57, 64, 73, 86, 102, 128, 171, 256, 341, 512    // 67..80
  };

  function automatic int coef(bit fg, int k, int c, int n);
    int first, total, q;
    if (n <= 1) return fg ? FG[k][c] : FC[k][c];
    first = k - (k % n);
    total = 0;
    for (int r = first; r < first + n; r++) total += fg ? FG[r][c] : FC[r][c];
    // Average truncated toward zero.
    q = (total < 0) ? -((-total) / n) : total / n;
    return q;
  endfunction

  function automatic int prediction(int r0, int r1, int r2, int r3, bit fg, int k,
                                    int n, int bit_depth);
    int s, v, maxv;
    s = coef(fg, k, 0, n) * r0 + coef(fg, k, 1, n) * r1
      + coef(fg, k, 2, n) * r2 + coef(fg, k, 3, n) * r3 + 32;
    v = s >>> 6;
    maxv = (1 << bit_depth) - 1;
    if (v < 0) v = 0;
    if (v > maxv) v = maxv;
    return v;
  endfunction

  // Sum before the clip, to see which side of the range a case lands on.
  function automatic int unclipped(int r0, int r1, int r2, int r3, bit fg, int k, int n);
    return (coef(fg, k, 0, n) * r0 + coef(fg, k, 1, n) * r1
          + coef(fg, k, 2, n) * r2 + coef(fg, k, 3, n) * r3 + 32) >>> 6;
  endfunction

endpackage
