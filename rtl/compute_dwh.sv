// compute_dwh: "Compute delta W_H" -- the metaplastic hidden-weight update of
// lines 6-11 of the training algorithm:
//
//     if U_W * (W_H - W_S) < 0 :  dW_H = -eta * U_W * M(W_H)
//     else                     :  dW_H = -eta * U_W
//
// U_W is the optimizer's update for this weight (from Adam, outside this
// block), eta the learning rate, W_H - W_S the residual from the quantizer and
// M the metaplastic factor. The condition is met when the update pushes W_H
// away from its current quantized level, towards a level change; only then is
// the step attenuated, which consolidates weights that sit near a level.
//
// Arithmetic: eta is unsigned with ETA_FRAC fraction bits, U_W and the result
// are in W_H LSBs. eta*U_W is shifted right by ETA_FRAC, the product with M by
// M_FRAC; both shifts are arithmetic (round towards -infinity). These formats
// are this design's choice. Purely combinational.
module compute_dwh
  import meta_pkg::*;
(
  input  upd_t                 u,          // optimizer update U_W
  input  eta_t                 eta,        // learning rate
  input  logic signed [WH_W:0] resid,      // W_H - W_S
  input  mfac_t                m,          // metaplastic factor
  output dw_t                  dw,         // hidden-weight change
  output logic                 attenuated  // the M branch was taken
);
  localparam int PW = U_W + ETA_W + 1;

  logic signed [PW-1:0]        prod;     // eta * U_W
  dw_t                         step;     // eta * U_W in W_H LSBs
  logic signed [DW_W+M_W:0]    scaled;   // step * M

  always_comb begin
    prod       = PW'(u) * $signed({1'b0, eta});
    step       = dw_t'(prod >>> ETA_FRAC);
    scaled     = (DW_W+M_W+1)'(step) * $signed({1'b0, m});
    // sign(U_W) differs from sign(W_H - W_S), both non-zero
    attenuated = (u != '0) && (resid != '0) && (u[U_W-1] != resid[WH_W]);
    if (attenuated)
      dw = -dw_t'(scaled >>> M_FRAC);
    else
      dw = -step;
  end

endmodule
