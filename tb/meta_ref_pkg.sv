// meta_ref_pkg: reference arithmetic for the testbenches, written from the
// equations rather than from the RTL: nearest level by exhaustive search,
// the metaplastic factor with the simulator's real-valued tanh, and the
// update rule with wide integers and explicit floor division.
package meta_ref_pkg;

  localparam int NMAX = 8;
  localparam int STEP = 256;     // W_H LSBs per quantization step

  // nearest of the levels k*STEP, k = -NMAX..NMAX; a tie goes to the higher
  function automatic void ref_quant(input int wh, output int ws, output int resid,
                                    output bit in_range);
    int best, bestd, d;
    best  = -NMAX;
    bestd = 1 << 30;
    for (int k = -NMAX; k <= NMAX; k++) begin
      d = wh - k * STEP;
      if (d < 0) d = -d;
      if (d <= bestd) begin
        bestd = d;
        best  = k;
      end
    end
    ws       = best;
    resid    = wh - best * STEP;
    in_range = (wh <= NMAX * STEP) && (wh >= -NMAX * STEP);
  endfunction

  // same with an arbitrary ascending level table q[0..16]; also returns the
  // interval width I of the interval holding wh (clamped at the ends)
  function automatic void ref_quant_tab(input int q[17], input int wh, output int ws,
                                        output int resid, output bit in_range,
                                        output int width);
    int best, bestd, d, k;
    best  = 0;
    bestd = 1 << 30;
    for (k = 0; k < 17; k++) begin
      d = wh - q[k];
      if (d < 0) d = -d;
      if (d <= bestd) begin
        bestd = d;
        best  = k;
      end
    end
    ws       = best - NMAX;
    resid    = wh - q[best];
    in_range = (wh >= q[0]) && (wh <= q[16]);
    k = best;
    if (wh < q[best] && best > 0) k = best - 1;
    if (k == 16) k = 15;
    width = q[k+1] - q[k];
  endfunction

  // exact M for an interval of width I (real-valued, 0..1)
  function automatic real ref_m_real(int resid, int width, real mstar);
    real x, t;
    int  d;
    d = (resid < 0) ? -resid : resid;
    x = 2.0 * mstar / real'(width) * real'(d) - mstar;
    t = $tanh(x);
    return 1.0 - t * t;
  endfunction

  // M = 1 - tanh^2(2 m*/I |W_H - W_S| - m*), in units of 1/256
  function automatic int ref_m(bit meta_en, int resid, bit in_range, real mstar);
    real x, t;
    int  d;
    if (!meta_en || !in_range) return 256;
    d = (resid < 0) ? -resid : resid;
    x = 2.0 * mstar / real'(STEP) * real'(d) - mstar;
    t = $tanh(x);
    return int'($floor((1.0 - t * t) * 256.0 + 0.5));
  endfunction

  function automatic longint floor_div(longint a, longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  // Algorithm lines 7-10; returns dW_H, sets att when the M branch applies
  function automatic longint ref_dw(int u, int eta, int resid, int m, output bit att);
    longint step;
    step = floor_div(longint'(u) * longint'(eta), 4096);
    att  = (longint'(u) * longint'(resid)) < 0;
    if (att) return -floor_div(step * m, 256);
    return -step;
  endfunction

  function automatic int ref_sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

endpackage
