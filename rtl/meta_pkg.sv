// meta_pkg: constants and types shared by the metaplastic learning core.
//
// Number formats
//   * A hidden weight W_H is a signed fixed-point number of WH_W bits. One
//     quantization step (the distance I between two adjacent quantized levels)
//     is 2**LVL_FRAC LSBs. With 17 equally spaced levels over [-1.5, 1.5] one
//     step is 0.1875, so one LSB is 0.1875/256 of a weight unit.
//   * A quantized weight W_S is a signed level index in [-NMAX, +NMAX]
//     (17 levels, NMAX = 8). It is stored in the crossbar as the conductance
//     difference of two memristors, each of which holds one of DEV_LEVELS = 9
//     levels (LCS = 0, HCS = 1..8).
//   * The metaplastic factor M is unsigned with M_FRAC fraction bits
//     (1.0 = 2**M_FRAC).
// The level count (17), the range (+-1.5) and the nine device levels follow
// the paper; the word widths and the fixed-point scaling are this design's
// choice. The level set itself is a parameter (lvl_tab_t, default equal
// spacing), since the metaplastic function is defined per interval and also
// allows unequally spaced levels.
package meta_pkg;

  // Quantized levels: 2*NMAX+1 = 17, matching 8 HCS levels + 1 LCS per device
  localparam int NMAX        = 8;
  localparam int N_LEVELS    = 2 * NMAX + 1;
  localparam int DEV_LEVELS  = NMAX + 1;       // 9 levels per memristor
  localparam int LVL_W       = 5;              // signed level index width
  localparam int DEVL_W      = 4;              // device level code width

  // Hidden weight format
  localparam int WH_W        = 16;
  localparam int LVL_FRAC    = 8;              // LSBs per quantization step = 256

  // Metaplastic factor format
  localparam int M_FRAC      = 8;
  localparam int M_W         = M_FRAC + 1;     // holds 0 .. 1.0

  // Update / learning-rate format
  localparam int U_W         = 16;             // Adam update U_W, W_H LSB units
  localparam int ETA_W       = 16;
  localparam int ETA_FRAC    = 12;             // eta in [0, 16)
  localparam int DW_W        = U_W + ETA_W - ETA_FRAC + 1;

  // Crossbar drive codes
  localparam int ACT_W       = 8;              // signed activation / error code

  typedef logic signed [WH_W-1:0]  wh_t;
  typedef logic [3:0]              ivl_t;      // interval index 0 .. N_LEVELS-2

  // Level set Q_0 .. Q_16 in W_H LSBs, ascending. The default is the
  // equally spaced set k * 2**LVL_FRAC, k = -NMAX..NMAX, i.e. [-1.5, 1.5].
  typedef logic signed [WH_W-1:0] lvl_tab_t [N_LEVELS];

  function automatic lvl_tab_t equal_levels();
    lvl_tab_t t;
    for (int k = 0; k < N_LEVELS; k++) t[k] = WH_W'((k - NMAX) * (1 << LVL_FRAC));
    return t;
  endfunction
  typedef logic signed [LVL_W-1:0] lvl_t;
  typedef logic [DEVL_W-1:0]       devl_t;
  typedef logic [M_W-1:0]          mfac_t;
  typedef logic signed [U_W-1:0]   upd_t;
  typedef logic [ETA_W-1:0]        eta_t;
  typedef logic signed [DW_W-1:0]  dw_t;
  typedef logic signed [ACT_W-1:0] act_t;

  // Programming pulses applied to one 1T1R device
  typedef enum logic [1:0] {
    PROG_FORM  = 2'd0,   // one-time forming of the first filament
    PROG_RESET = 2'd1,   // to the low-conductance state (LCS)
    PROG_SET   = 2'd2    // to an HCS level chosen by the compliance current
  } prog_op_e;

  // Differential encoding of a level index on a device pair:
  // positive weights on the "plus" device, negative on the "minus" device,
  // zero as both devices in LCS.
  function automatic devl_t pos_part(lvl_t l);
    return (l > 0) ? devl_t'(l) : devl_t'(0);
  endfunction

  function automatic devl_t neg_part(lvl_t l);
    return (l < 0) ? devl_t'(-l) : devl_t'(0);
  endfunction

endpackage
