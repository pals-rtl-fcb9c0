// pals_tb_pkg: reference functions shared by the PALS testbenches.
//
// They restate the specification numerically, without reference to the gate
// structure of the design:
//   code_of(o)  thermometer word of an offset o = L_w - L_v (femtoseconds):
//               bit L+i-1 (Q^{+i}) = o >= -(2i-1)*kappa - delta,
//               bit L-i   (Q^{-i}) = o >= +(2i-1)*kappa - delta.
//   fast_trigger(omin, omax)  true iff some s in 0..L-1 satisfies
//               FT1 omax >= (2s+1)*kappa - delta and FT2 omin >= -(2s+1)*kappa - delta.
//   near_threshold(o)  o lies within `margin` of one of the thresholds, where
//               a flip-flop may resolve either way.
package pals_tb_pkg;
  timeunit 1fs;
  timeprecision 1fs;

  function automatic longint thr_pos(int i, longint kappa, longint delta);
    return -(2 * i - 1) * kappa - delta;
  endfunction

  function automatic longint thr_neg(int i, longint kappa, longint delta);
    return (2 * i - 1) * kappa - delta;
  endfunction

  function automatic logic [15:0] code_of(longint o, int levels,
                                          longint kappa, longint delta);
    logic [15:0] c;
    c = '0;
    for (int i = 1; i <= levels; i++) begin
      c[levels + i - 1] = (o >= thr_pos(i, kappa, delta));
      c[levels - i]     = (o >= thr_neg(i, kappa, delta));
    end
    return c;
  endfunction

  function automatic logic fast_trigger(longint omin, longint omax, int levels,
                                        longint kappa, longint delta);
    for (int s = 0; s < levels; s++)
      if (omax >= (2 * s + 1) * kappa - delta && omin >= -(2 * s + 1) * kappa - delta)
        return 1'b1;
    return 1'b0;
  endfunction

  function automatic logic near_threshold(longint o, int levels, longint kappa,
                                          longint delta, longint margin);
    for (int i = 1; i <= levels; i++) begin
      longint dp = o - thr_pos(i, kappa, delta);
      longint dn = o - thr_neg(i, kappa, delta);
      if ((dp < margin && dp > -margin) || (dn < margin && dn > -margin))
        return 1'b1;
    end
    return 1'b0;
  endfunction

endpackage
