// wh_adder: the adder that forms the new hidden weight W_H = W_H,old + dW_H
// before it is written back to the digital memory.
//
// The sum saturates at the limits of the WH_W-bit hidden-weight format
// instead of wrapping; saturation is this design's choice (the paper treats
// hidden weights as unbounded reals). Purely combinational.
module wh_adder
  import meta_pkg::*;
(
  input  wh_t  wh_old,
  input  dw_t  dw,
  output wh_t  wh_new,
  output logic sat        // the sum was clipped
);
  localparam int SW = (DW_W > WH_W ? DW_W : WH_W) + 1;
  localparam logic signed [SW-1:0] MAXV = SW'({1'b0, {(WH_W-1){1'b1}}});
  localparam logic signed [SW-1:0] MINV = -MAXV - SW'(1);

  logic signed [SW-1:0] sum;

  always_comb begin
    sum = SW'(wh_old) + SW'(dw);
    sat = 1'b0;
    if (sum > MAXV) begin
      wh_new = wh_t'(MAXV);
      sat    = 1'b1;
    end else if (sum < MINV) begin
      wh_new = wh_t'(MINV);
      sat    = 1'b1;
    end else begin
      wh_new = wh_t'(sum);
    end
  end

endmodule
