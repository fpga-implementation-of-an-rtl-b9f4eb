// fovea_ref_pkg: reference arithmetic for the testbenches.
//
// Recomputes the saliency state update from its definition rather than from
// the RTL: exp(-u) is evaluated with $exp at the breakpoints u = k/2 and
// interpolated linearly, then s_new = gain + s_old * decay with the same
// Q12.8 / Q1.16 fixed-point rounding (floor) and 21-bit saturation the
// hardware documents.
package fovea_ref_pkg;

  function automatic longint exp_bp(int k);
    if (k >= 16) return 22;
    return longint'($rtoi($exp(-real'(k) / 2.0) * 65536.0 + 0.5));
  endfunction

  // decay factor in Q1.16 for elapsed time dt and inv_tau = 2^24 / tau
  function automatic longint decay_q16(longint unsigned dt, longint unsigned inv_tau);
    longint unsigned u;
    longint k, frac, y0, y1;
    u = dt * inv_tau;                 // Q.24
    if (u >= (64'd16 << 23)) return 0;
    k    = longint'(u >> 23);
    frac = longint'((u >> 7) & 64'hFFFF);
    y0 = exp_bp(int'(k));
    y1 = exp_bp(int'(k) + 1);
    return y0 - (((y0 - y1) * frac) >>> 16);
  endfunction

  function automatic longint sat21(longint v);
    if (v > 1048575)  return 1048575;
    if (v < -1048576) return -1048576;
    return v;
  endfunction

  // s_new = gain + s_old * exp(-dt/tau), all states in Q12.8 integers
  function automatic longint update(longint s_old, longint unsigned dt,
                                    longint unsigned inv_tau, longint gain);
    return sat21(gain + ((s_old * decay_q16(dt, inv_tau)) >>> 16));
  endfunction

endpackage
