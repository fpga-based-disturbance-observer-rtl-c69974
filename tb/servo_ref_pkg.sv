// servo_ref_pkg: cycle-accurate reference models of the PID controller and the
// disturbance observer, written independently of the RTL in 64-bit integers for the
// self-checking testbenches. Each step() call is one rising clock edge with the
// inputs present before it; the outputs are the register values after the edge.
package servo_ref_pkg;

  // floor(v / 2^n) for any sign of v
  function automatic longint fdiv(longint v, int n);
    longint p = longint'(1) << n;
    longint q = v / p;
    if (v < 0 && q * p != v) q = q - 1;
    return q;
  endfunction

  function automatic longint clip(longint v, int bits);
    longint hi = (longint'(1) << (bits - 1)) - 1;
    longint lo = -(longint'(1) << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // EMA with 16 guard bits
  class ema_ref;
    longint acc = 0;
    function longint out(); return fdiv(acc, 16); endfunction
    function void step(longint x, int n);
      acc = acc + fdiv((x << 16) - acc, n);
    endfunction
  endclass

  // PID: pre-filter, P/I/D registers, clipped sum; shifts 12 / 18 / 10
  class pid_ref;
    ema_ref pf = new();
    longint e_prev = 0, p_r = 0, d_r = 0, i_acc = 0, u = 0;
    bit sat = 0, clamp = 0;
    function void step(longint e, longint kp, longint ki, longint kd, int pf_n, bit int_rst);
      longint ef = pf.out();
      longint sum = p_r + fdiv(i_acc, 18) + d_r;
      longint inew = i_acc + ki * ef;
      u = clip(sum, 14);
      sat = (u != sum);
      p_r = fdiv(kp * ef, 12);
      d_r = fdiv(kd * (ef - e_prev), 10);
      e_prev = ef;
      if (int_rst) begin i_acc = 0; clamp = 0; end
      else begin i_acc = clip(inew, 32); clamp = (i_acc != inew); end
      pf.step(e, pf_n);
    endfunction
  endclass

  // DOB: y,u -> (kn*y >> 8) - u -> EMA -> clipped d_hat, five registers deep
  class dob_ref;
    ema_ref q = new();
    longint y1 = 0, u1 = 0, prod = 0, u2 = 0, x3 = 0, d = 0;
    function void step(bit en, longint y, longint u, longint kn, int n);
      if (!en) begin
        y1 = 0; u1 = 0; prod = 0; u2 = 0; x3 = 0; d = 0; q.acc = 0;
        return;
      end
      d = clip(q.out(), 14);
      q.step(x3, n);
      x3 = fdiv(prod, 8) - u2;
      prod = kn * y1;
      u2 = u1;
      y1 = y;
      u1 = u;
    endfunction
  endclass

endpackage
