// tb_meta_function: compares the metaplastic factor with
// 1 - tanh^2(2 m*/I |W_H - W_S| - m*) computed with the simulator's real
// tanh. With equally spaced levels the match must be exact for every
// residual in [-I/2, I/2], at the default m* = 3 and at m* = 1.5. With an
// unequally spaced level table every interval is swept and the result must
// lie within 5/256 of the exact value (the table index is truncated to
// 1/128 of a half interval). Also checks M = 1 with metaplasticity off and
// outside the quantized range, and the end points sech^2(m*) and 1.
module tb_meta_function;
  import meta_pkg::*;
  import meta_ref_pkg::*;

  logic                 meta_en, in_range;
  logic signed [WH_W:0] resid;
  mfac_t                m3, m15;
  int checks = 0, failures = 0;

  ivl_t                 ivl;
  mfac_t                mu;

  localparam lvl_tab_t UNEQ = '{-16'sd2048, -16'sd1800, -16'sd1500, -16'sd1250, -16'sd1000,
                                -16'sd800, -16'sd500, -16'sd250, 16'sd0, 16'sd200, 16'sd450,
                                16'sd700, 16'sd1000, 16'sd1300, 16'sd1500, 16'sd1800, 16'sd2600};

  meta_function                  dut3  (.meta_en(meta_en), .resid(resid), .ivl(ivl), .in_range(in_range), .m(m3));
  meta_function #(.M_STAR(1.5))  dut15 (.meta_en(meta_en), .resid(resid), .ivl(ivl), .in_range(in_range), .m(m15));
  meta_function #(.LEVELS(UNEQ)) dutu  (.meta_en(meta_en), .resid(resid), .ivl(ivl), .in_range(in_range), .m(mu));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("%s: resid=%0d en=%0b in=%0b got %0d expected %0d",
                 what, resid, meta_en, in_range, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ivl = 4'd3;
    for (int en = 0; en < 2; en++)
      for (int inr = 0; inr < 2; inr++)
        for (int r = -128; r <= 128; r++) begin
          meta_en  = en[0];
          in_range = inr[0];
          resid    = (WH_W+1)'(r);
          #1;
          check(int'(m3),  ref_m(en[0], r, inr[0], 3.0), "m*=3");
          check(int'(m15), ref_m(en[0], r, inr[0], 1.5), "m*=1.5");
        end
    // unequal levels: every interval, every residual up to half its width
    meta_en = 1'b1; in_range = 1'b1;
    for (int k = 0; k < 16; k++) begin
      int w;
      real e;
      w = int'(UNEQ[k+1]) - int'(UNEQ[k]);
      ivl = ivl_t'(k);
      for (int r = -(w / 2); r <= w / 2; r++) begin
        resid = (WH_W+1)'(r);
        #1;
        e = ref_m_real(r, w, 3.0) * 256.0;
        checks++;
        if (real'(mu) > e + 5.0 || real'(mu) < e - 5.0) begin
          failures++;
          if (failures < 10) $display("unequal: ivl=%0d resid=%0d got %0d expected %f", k, r, mu, e);
        end
      end
    end
    ivl = 4'd3;
    // end points: on a level sech^2(3)*256 = 2.53 -> 3, mid-point 1.0
    meta_en = 1'b1; in_range = 1'b1;
    resid = '0;  #1; check(int'(m3), 3,   "on level");
    resid = 128; #1; check(int'(m3), 256, "midpoint");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
