// fir_pkg -- constants shared by the 64-tap RAG-improved FIR filter.
//
// Holds the quantised coefficient table of the 64-tap low-pass filter
// (Fs = 250 kHz, Fc = 20 kHz) for taps 0..31; taps 32..63 mirror them,
// h(n) = h(63-n).  It also fixes how the taps are split between the two
// halves of the filter:
//   * coeff-r: the 15 distinct small magnitudes, produced for all taps at
//     once by one shared shift-and-add multiplier block (rag_mult_block);
//   * coeff-s: the 16 large magnitudes, multiplied after a symmetric
//     pre-addition (sym_section).
// The table, the two sets and the 64-tap length follow the paper.  The
// data width is not given there; modules take it as a parameter
// (default 16 bits) and derive their internal widths from the constants
// below.
package fir_pkg;

  localparam int N_TAPS = 64;
  localparam int N_HALF = N_TAPS / 2;

  // h(0) .. h(31); h(63-n) = h(n)
  localparam int H [N_HALF] = '{
      219,   137,   162,   174,   168,   137,    79,    -9,
     -127,  -269,  -428,  -592,  -747,  -875,  -957,  -972,
     -903,  -733,  -450,   -49,   470,  1100,  1825,  2622,
     3462,  4311,  5134,  5891,  6548,  7072,  7437,  7624 };

  // coeff-r: the distinct small magnitudes built by the multiplier block,
  // in the order of its product outputs.
  localparam int N_R = 15;
  localparam int R_SET [N_R] = '{
      9, 49, 79, 127, 137, 162, 168, 174, 219, 269, 428, 450, 470, 592, 733 };

  // sum over all 64 taps of |h(n)| = 123366 < 2**17: a full-precision
  // output needs DATA_W + SUM_GROWTH bits (signed).
  localparam int SUM_GROWTH = 17;
  // largest coeff-r magnitude 733 < 2**10
  localparam int RAG_GROWTH = 10;
  // largest coeff-s magnitude 7624 < 2**13, signed: 14 bits
  localparam int COEF_W = 14;

  // Coefficient of tap n, 0 <= n < N_TAPS.
  function automatic int h_of(int n);
    return (n < N_HALF) ? H[n] : H[N_TAPS - 1 - n];
  endfunction

  function automatic int abs_i(int v);
    return (v < 0) ? -v : v;
  endfunction

  // Index of |h(n)| in R_SET, or -1 when the tap belongs to coeff-s.
  function automatic int r_index(int n);
    int idx;
    idx = -1;
    for (int i = 0; i < N_R; i++)
      if (R_SET[i] == abs_i(h_of(n))) idx = i;
    return idx;
  endfunction

  // +1 / -1 for a coeff-r tap of that sign, 0 for a coeff-s tap.
  function automatic int r_sign(int n);
    if (r_index(n) < 0) return 0;
    return (h_of(n) < 0) ? -1 : 1;
  endfunction

  // The split rule itself: after taking magnitudes and dropping duplicates
  // (Table I has no power-of-two magnitude to drop), a magnitude belongs to
  // the small set when fewer than N_R distinct magnitudes are below it.
  // With 31 distinct magnitudes that keeps the (31-1)/2 = 15 smallest.
  function automatic bit is_small(int n);
    int mag, below;
    bit seen;
    mag   = abs_i(h_of(n));
    below = 0;
    for (int a = 0; a < N_HALF; a++) begin
      seen = 1'b0;
      for (int b = 0; b < a; b++)
        if (abs_i(H[b]) == abs_i(H[a])) seen = 1'b1;
      if (!seen && abs_i(H[a]) < mag) below++;
    end
    return below < N_R;
  endfunction

  // Coefficient used by the symmetric section for tap n (0 when coeff-r).
  function automatic int s_coef(int n);
    return (r_index(n) < 0) ? h_of(n) : 0;
  endfunction

endpackage
