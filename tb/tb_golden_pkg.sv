// tb_golden_pkg: reference arithmetic for the testbenches, written apart
// from the RTL.
//
// g_log2 is the fixed-point log2 with 4 fraction bits (integer part = index
// of the leading one, fraction = the 4 bits below it); g_theta the
// threshold b - (a-1) log2(MSD) with a in Q4.4 and b in Q11.4, floored and
// saturated to 16 bits; g_thr the linear magnitude threshold 2^theta on the
// same grid; g_sat16 a 16-bit signed saturation.
package tb_golden_pkg;

  function automatic int g_log2(input longint unsigned v);
    int msb;
    longint unsigned f;
    msb = -1;
    while (v >> (msb + 1) != 0) msb++;
    if (msb < 0) return 0;
    f = ((v << 4) >> msb) & 64'd15;
    return msb * 16 + int'(f);
  endfunction

  function automatic int g_sat16(input longint x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return int'(x);
  endfunction

  function automatic int g_theta(input longint unsigned msd, input int a, input int b);
    longint p;
    if (msd == 0) return 32767;
    p = longint'(a - 16) * longint'(g_log2(msd));
    return g_sat16(longint'(b) - (p >>> 4));
  endfunction

  function automatic longint unsigned g_thr(input int theta);
    int ip, f;
    if (theta < 0) return 0;
    ip = theta / 16;
    f  = theta % 16;
    if (ip > 58) return 64'hFFFF_FFFF_FFFF_FFFF;
    return (longint'(16 + f) << ip) >> 4;
  endfunction

endpackage
