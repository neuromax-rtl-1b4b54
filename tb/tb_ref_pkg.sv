// tb_ref_pkg: reference arithmetic for the NeuroMAX testbenches.
//
// The functions here restate the number formats without the RTL's structure:
//  thread_ref  : product of a weight code and an activation code, from
//                magnitude = floor(T / 2^(63 - floor(S/2))) with T = 32767 for odd
//                S and 23170 (15'h5A82) for even S, negated when the weight's
//                bit 6 is set.
//  quant_ref   : ReLU and log base sqrt(2) rounding by exact integer comparison:
//                k = round(2*log2(y)) is the j with 2^(2j-1) <= y^4 < 2^(2j+1).
package tb_ref_pkg;

  function automatic int thread_ref(input int unsigned w, input int unsigned a);
    int unsigned s, e, t;
    longint      mag;
    s = (w & 63) + (a & 63);
    t = (s % 2 == 1) ? 32767 : 23170;
    e = 63 - s / 2;
    mag = (e >= 31) ? 0 : longint'(t) / (longint'(1) << e);
    return ((w >> 6) & 1) ? -int'(mag) : int'(mag);
  endfunction

  function automatic int unsigned quant_ref(input longint y, input int q);
    logic [135:0] y4, lo, hi;
    int k;
    if (y <= 0) return 0;
    y4 = 136'(y) * 136'(y) * 136'(y) * 136'(y);
    k = -1;
    for (int j = 0; j < 66; j++) begin
      lo = (j == 0) ? 136'd1 : (136'd1 << (2*j - 1));
      hi = 136'd1 << (2*j + 1);
      if (y4 >= lo && y4 < hi) k = j;
    end
    if (k < 0) k = 0;   // y = 1 gives y^4 = 1 in [2^-1, 2^1): k = 0
    k = k + q;
    if (k < 1) return 0;
    if (k > 63) return 63;
    return k;
  endfunction

endpackage
