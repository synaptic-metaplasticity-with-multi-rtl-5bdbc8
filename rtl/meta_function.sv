// meta_function: the metaplastic factor M(W_H) of Eq. 2,
//
//     M = 1 - tanh^2( (2 m*/I) |W_H - W_S| - m* ),
//
// where I is the distance between the two levels around W_H and W_S the
// nearest level. With u = 2 |W_H - W_S| / I in [0, 1] this is
// M = sech^2( m* (1 - u) ): 1 half-way between two levels and
// sech^2(m*) on a level. M falls to its minimum on a level and rises to its
// maximum at the midpoint, as the paper asks.
//
// Implementation: u is formed as |W_H - W_S| times a constant reciprocal of
// half the width of the interval ivl that holds W_H (one per interval,
// computed at elaboration from the LEVELS parameter, so unequally spaced
// levels are handled), truncated to LUT_BITS fraction bits. It indexes a table
// of 2**LUT_BITS + 1 entries, filled at elaboration from the real-valued
// formula (sech^2 z = 4 / (e^z + e^-z)^2, with e^z from a Taylor series), so
// M_STAR can be changed by a parameter. The default m* = 3 is the paper's
// chosen value. Entries are rounded to M_FRAC fraction bits. With the
// default equally spaced levels the index is exactly |W_H - W_S|. Purely
// combinational.
//
// meta_en = 0 gives M = 1 (the paper's m* = 0 pre-training phase).
// Outside the quantized range (in_range = 0) M = 1, as the curves of the
// paper's Fig. 1c show beyond the outermost levels; the text defines M only
// inside the level intervals, so this is this design's reading.
module meta_function
  import meta_pkg::*;
#(
  parameter real      M_STAR   = 3.0,             // steepness m*
  parameter int       LUT_BITS = 7,               // 2**LUT_BITS steps per half interval
  parameter lvl_tab_t LEVELS   = equal_levels()   // quantized levels, as in the quantizer
)(
  input  logic                 meta_en,   // 0: m* = 0 (no consolidation)
  input  logic signed [WH_W:0] resid,     // W_H - W_S in W_H LSBs
  input  ivl_t                 ivl,       // interval holding W_H (from the quantizer)
  input  logic                 in_range,
  output mfac_t                m          // M with M_FRAC fraction bits
);
  localparam int LUT_N    = (1 << LUT_BITS) + 1;
  localparam int ONE      = 1 << M_FRAC;
  localparam int RS       = 16;                        // reciprocal fraction bits
  localparam int RCP_W    = 24;

  // RCP[k] = 2**(LUT_BITS+RS) / (I_k / 2), I_k = Q_k+1 - Q_k
  typedef logic [RCP_W-1:0] rcp_t [N_LEVELS-1];

  function automatic rcp_t make_rcp();
    rcp_t r;
    longint w;
    for (int k = 0; k < N_LEVELS - 1; k++) begin
      w    = longint'(LEVELS[k+1]) - longint'(LEVELS[k]);
      r[k] = RCP_W'(((longint'(2) << (LUT_BITS + RS)) + w / 2) / w);
    end
    return r;
  endfunction

  localparam rcp_t RCP = make_rcp();

  // e^z for 0 <= z <= ~20 by halving and a Taylor series
  function automatic real exp_r(real z);
    real x, term, sum;
    int  k, halvings;
    x = z;
    halvings = 0;
    while (x > 0.5) begin
      x = x / 2.0;
      halvings++;
    end
    sum  = 1.0;
    term = 1.0;
    for (k = 1; k < 20; k++) begin
      term = term * x / real'(k);
      sum  = sum + term;
    end
    for (k = 0; k < halvings; k++) sum = sum * sum;
    return sum;
  endfunction

  typedef mfac_t lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    real  u, z, ez, s;
    for (int i = 0; i < LUT_N; i++) begin
      u  = real'(i) / real'(LUT_N - 1);
      z  = M_STAR * (1.0 - u);
      ez = exp_r(z);
      s  = 4.0 / ((ez + 1.0 / ez) * (ez + 1.0 / ez));   // sech^2(z)
      // int'() of a real rounds to the nearest integer
      t[i] = mfac_t'(int'(s * real'(ONE)) > ONE ? ONE : int'(s * real'(ONE)));
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [WH_W:0]          mag;
  logic [WH_W+RCP_W:0]     prod;
  logic [WH_W+RCP_W-RS:0]  idx;

  always_comb begin
    mag  = resid[WH_W] ? (WH_W+1)'(-resid) : (WH_W+1)'(resid);
    prod = (WH_W+RCP_W+1)'(mag) * (WH_W+RCP_W+1)'(RCP[ivl]);
    idx  = prod[WH_W+RCP_W:RS];
    if (!meta_en || !in_range || idx >= (WH_W+RCP_W-RS+1)'(LUT_N))
      m = mfac_t'(ONE);
    else
      m = LUT[idx[LUT_BITS:0]];
  end

endmodule
