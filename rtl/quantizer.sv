// quantizer: "Approximate to Q" -- maps a hidden weight W_H to the nearest
// quantized level W_S (Eq. 1 of the metaplasticity rule).
//
// The 17 levels Q_0 < ... < Q_16 are the parameter LEVELS (in W_H LSBs); by
// default they are equally spaced, one step being 2**LVL_FRAC LSBs, over
// [-1.5, 1.5]. The nearest level is found by comparing W_H with the 16
// mid-points between adjacent levels (constants): the level index is the
// number of mid-points W_H has reached, so a W_H exactly on a mid-point goes
// to the upper level. Beyond the outer levels W_H clamps to them.
//
// Outputs: the level as a signed index ws = i - NMAX, the residual
// W_H - Q_i, the interval [Q_k, Q_k+1] that contains W_H (ivl = k, needed
// by the metaplastic function, whose scale is the interval width), and
// whether W_H lies within [Q_0, Q_16]. Purely combinational.
//
// Follows the paper: nearest-level approximation, 17 levels in [-1.5, 1.5],
// per-interval width. This design's choice: equal default spacing, tie
// rounding, clamping outside the range.
module quantizer
  import meta_pkg::*;
#(
  parameter lvl_tab_t LEVELS = equal_levels()
)(
  input  wh_t                     wh,        // hidden weight
  output lvl_t                    ws,        // nearest level index, -NMAX..NMAX
  output logic signed [WH_W:0]    resid,     // wh - Q[ws]
  output ivl_t                    ivl,       // interval holding wh
  output logic                    in_range   // Q_0 <= wh <= Q_16
);
  typedef logic signed [WH_W:0] wide_t;
  typedef wide_t mid_t [N_LEVELS-1];

  function automatic mid_t make_mids();
    mid_t m;
    for (int k = 0; k < N_LEVELS - 1; k++)
      m[k] = (wide_t'(LEVELS[k]) + wide_t'(LEVELS[k+1]) + wide_t'(1)) >>> 1;
    return m;
  endfunction

  localparam mid_t MIDS = make_mids();

  int unsigned idx;      // index of the nearest level, 0 .. N_LEVELS-1

  always_comb begin
    idx = 0;
    for (int k = 0; k < N_LEVELS - 1; k++)
      if (wide_t'(wh) >= MIDS[k]) idx = k + 1;
    ws    = lvl_t'(int'(idx) - NMAX);
    resid = wide_t'(wh) - wide_t'(LEVELS[idx]);
    // interval: above the level unless below it, clamped at the ends
    if (resid[WH_W] && idx != 0)
      ivl = ivl_t'(idx - 1);
    else if (idx == N_LEVELS - 1)
      ivl = ivl_t'(N_LEVELS - 2);
    else
      ivl = ivl_t'(idx);
    in_range = (wh >= LEVELS[0]) && (wh <= LEVELS[N_LEVELS-1]);
  end

endmodule
