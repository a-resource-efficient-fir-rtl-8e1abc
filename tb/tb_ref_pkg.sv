// tb_ref_pkg -- reference data for the filter testbenches, kept apart from
// the design's own package so the checks do not reuse the tables under test.
// TB_H is the 64-tap coefficient table (taps 0..31, h(n) = h(63-n));
// TB_COEFF_S lists the large magnitudes handled by the symmetric section.
package tb_ref_pkg;

  localparam int TB_TAPS = 64;

  localparam int TB_H [32] = '{
     219,  137,  162,  174,  168,  137,   79,   -9,
    -127, -269, -428, -592, -747, -875, -957, -972,
    -903, -733, -450,  -49,  470, 1100, 1825, 2622,
    3462, 4311, 5134, 5891, 6548, 7072, 7437, 7624 };

  localparam int TB_COEFF_R [15] = '{
    9, 49, 79, 127, 137, 162, 168, 174, 219, 269, 428, 450, 470, 592, 733 };

  localparam int TB_COEFF_S [16] = '{
    747, 875, 957, 972, 903, 1100, 1825, 2622,
    3462, 4311, 5134, 5891, 6548, 7072, 7437, 7624 };

  function automatic int ref_h(int k);
    return (k < 32) ? TB_H[k] : TB_H[63 - k];
  endfunction

  function automatic bit ref_is_s(int k);
    int a;
    a = (ref_h(k) < 0) ? -ref_h(k) : ref_h(k);
    foreach (TB_COEFF_S[i]) if (TB_COEFF_S[i] == a) return 1'b1;
    return 1'b0;
  endfunction

  // Coefficient of tap k restricted to one half: s = 1 keeps coeff-s taps,
  // s = 0 keeps coeff-r taps.
  function automatic longint ref_h_part(int k, bit s);
    return (ref_is_s(k) == s) ? longint'(ref_h(k)) : 64'sd0;
  endfunction

endpackage
