// tb_quantizer: exhaustive test of the nearest-level approximation. Every
// 16-bit hidden weight is applied to two instances, one with the default
// equally spaced levels and one with an unequally spaced level table, and
// the level index, residual, interval and in-range flag are compared with an
// exhaustive nearest-level search.
module tb_quantizer;
  import meta_pkg::*;
  import meta_ref_pkg::*;

  wh_t                  wh;
  lvl_t                 ws;
  logic signed [WH_W:0] resid;
  logic                 in_range;
  int checks = 0, failures = 0;

  ivl_t                 ivl, ivl2;
  lvl_t                 ws2;
  logic signed [WH_W:0] resid2;
  logic                 in_range2;

  localparam lvl_tab_t UNEQ = '{-16'sd2048, -16'sd1800, -16'sd1500, -16'sd1250, -16'sd1000,
                                -16'sd800, -16'sd500, -16'sd250, 16'sd0, 16'sd200, 16'sd450,
                                16'sd700, 16'sd1000, 16'sd1300, 16'sd1500, 16'sd1800, 16'sd2600};
  int q_uneq [17];
  int q_eq   [17];

  quantizer dut (.wh(wh), .ws(ws), .resid(resid), .ivl(ivl), .in_range(in_range));
  quantizer #(.LEVELS(UNEQ)) dut2 (.wh(wh), .ws(ws2), .resid(resid2), .ivl(ivl2),
                                   .in_range(in_range2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_ws, e_res, e_w, w_ivl2;
    bit e_in;
    for (int k = 0; k < 17; k++) begin
      q_uneq[k] = int'(UNEQ[k]);
      q_eq[k]   = (k - 8) * 256;
    end
    for (int v = -32768; v < 32768; v++) begin
      wh = wh_t'(v);
      #1;
      ref_quant(v, e_ws, e_res, e_in);
      checks++;
      if (int'(ws) != e_ws || int'(resid) != e_res || in_range != e_in) begin
        failures++;
        if (failures < 10)
          $display("wh=%0d: ws=%0d resid=%0d in=%0b, expected %0d %0d %0b",
                   v, ws, resid, in_range, e_ws, e_res, e_in);
      end
      ref_quant_tab(q_eq, v, e_ws, e_res, e_in, e_w);
      checks++;
      if (q_eq[int'(ivl)+1] - q_eq[int'(ivl)] != e_w || int'(ws) != e_ws) begin
        failures++;
        if (failures < 10) $display("wh=%0d: interval %0d wrong", v, ivl);
      end
      ref_quant_tab(q_uneq, v, e_ws, e_res, e_in, e_w);
      w_ivl2 = q_uneq[int'(ivl2)+1] - q_uneq[int'(ivl2)];
      checks++;
      if (int'(ws2) != e_ws || int'(resid2) != e_res || in_range2 != e_in || w_ivl2 != e_w) begin
        failures++;
        if (failures < 10)
          $display("unequal wh=%0d: ws=%0d resid=%0d in=%0b width=%0d, expected %0d %0d %0b %0d",
                   v, ws2, resid2, in_range2, w_ivl2, e_ws, e_res, e_in, e_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
