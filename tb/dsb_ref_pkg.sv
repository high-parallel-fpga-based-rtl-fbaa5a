// dsb_ref_pkg: reference model used by the testbenches. It restates the dSB
// update in plain integer arithmetic, independently of the RTL structure:
// one function for the time evolution of one oscillator and helpers for the
// fixed-point formats (13 fraction bits for x and y, 20 for coefficients).
package dsb_ref_pkg;

  localparam int XF = 13;
  localparam int PF = 20;
  localparam longint ONE = 64'sd1 << XF;

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // Floor division by 2^s (arithmetic shift of a signed value).
  function automatic longint fshr(input longint v, input int s);
    return v >>> s;
  endfunction

  // One time-evolution update. Returns the new x and y and whether the wall
  // clipped x.
  function automatic void te(input longint x, input longint y, input longint mm,
                             input longint a, input longint a0, input longint dt,
                             input longint c0, input longint gamma, input bit heat,
                             output longint xn, output longint yn, output bit wall);
    longint f, yt, xt, h;
    f  = fshr((a - a0) * x, XF) + c0 * mm;
    yt = sat16(y + fshr(f * dt, 2 * PF - XF));
    xt = x + fshr(fshr(a0 * yt, PF) * dt, PF);
    wall = (xt > ONE) || (xt < -ONE);
    h  = heat ? fshr(fshr(gamma * y, PF) * dt, PF) : 0;
    if (wall) begin
      xn = (xt < 0) ? -ONE : ONE;
      yn = sat16(h);
    end else begin
      xn = xt;
      yn = sat16(yt + h);
    end
  endfunction

  // Real value to fixed point with f fraction bits (rounded to nearest).
  function automatic longint to_fix(input real v, input int f);
    return longint'(v * (2.0 ** f));
  endfunction

endpackage
