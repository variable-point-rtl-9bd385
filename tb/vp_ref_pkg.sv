// vp_ref_pkg: reference arithmetic for the testbenches of the VP equalizer.
//
// The models here work on integer values rather than on bit fields, so they
// check the RTL by a different route: a fixed-point number is an integer
// count of LSBs, FXP-to-VP conversion is "the first fractional length for
// which the arithmetically shifted value still fits in M signed bits", and
// a VP product is m_y * m_w scaled by 2^(PF - f_y - f_w).
package vp_ref_pkg;
  import vp_pkg::*;

  // sign-extend the low w bits of v
  function automatic longint sext(longint v, int w);
    longint r = v & ((64'sd1 <<< w) - 1);
    if (r >= (64'sd1 <<< (w - 1))) r -= (64'sd1 <<< w);
    return r;
  endfunction

  function automatic longint iabs(longint v);
    return (v < 0) ? -v : v;
  endfunction

  // FXP(., F) integer x to VP(M, fl[0..K-1]); fl holds up to 8 entries
  function automatic void to_vp(input longint x, input int F, input int M, input int K,
                                input int fl [8], output longint m, output int i);
    longint q;
    for (int k = 0; k < K; k++) begin
      q = x >>> (F - fl[k]);
      if (q >= -(64'sd1 <<< (M - 1)) && q < (64'sd1 <<< (M - 1))) begin
        m = q; i = k; return;
      end
    end
    m = x >>> (F - fl[K-1]); i = K - 1;
  endfunction

  function automatic void y_to_vp(input longint x, output longint m, output int i);
    int fl [8] = '{FLY_DEF[0], FLY_DEF[1], 0, 0, 0, 0, 0, 0};
    to_vp(x, FY_DEF, MY_DEF, KY_DEF, fl, m, i);
  endfunction

  function automatic void w_to_vp(input longint x, output longint m, output int i);
    int fl [8] = '{FLW_DEF[0], FLW_DEF[1], FLW_DEF[2], FLW_DEF[3], 0, 0, 0, 0};
    to_vp(x, FW_DEF, MW_DEF, KW_DEF, fl, m, i);
  endfunction

  // real VP product in LSBs of FXP(PW_DEF, PF_DEF)
  function automatic longint vp_prod(longint my, int iy, longint mw, int iw);
    return (my * mw) <<< (PF_DEF - FLY_DEF[iy] - FLW_DEF[iw]);
  endfunction

  // CSPADE small-operand test
  function automatic bit is_small(longint re, longint im, longint tau);
    return iabs(re) < tau && iabs(im) < tau;
  endfunction
endpackage
