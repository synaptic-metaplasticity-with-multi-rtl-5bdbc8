// tb_compute_dwh: random and corner-case test of the metaplastic update
// rule against a wide-integer reference (floor division, sign test on the
// product U_W * (W_H - W_S)).
module tb_compute_dwh;
  import meta_pkg::*;
  import meta_ref_pkg::*;

  upd_t                 u;
  eta_t                 eta;
  logic signed [WH_W:0] resid;
  mfac_t                m;
  dw_t                  dw;
  logic                 att;
  int checks = 0, failures = 0;

  compute_dwh dut (.u(u), .eta(eta), .resid(resid), .m(m), .dw(dw), .attenuated(att));

  task automatic apply(int uu, int ee, int rr, int mm);
    longint e;
    bit     ea;
    u = upd_t'(uu); eta = eta_t'(ee); resid = (WH_W+1)'(rr); m = mfac_t'(mm);
    #1;
    e = ref_dw(uu, ee, rr, mm, ea);
    checks++;
    if (longint'(dw) != e || att != ea) begin
      failures++;
      if (failures < 10)
        $display("u=%0d eta=%0d resid=%0d m=%0d: dw=%0d att=%0b expected %0d %0b",
                 uu, ee, rr, mm, dw, att, e, ea);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // corner cases: zero update, zero residual, extreme values, both branches
    apply(0, 4096, 50, 100);
    apply(100, 4096, 0, 3);
    apply(100, 4096, 50, 3);       // same sign: full step
    apply(100, 4096, -50, 3);      // opposite sign: attenuated
    apply(-100, 4096, 50, 3);
    apply(-100, 4096, -50, 3);
    apply(-32768, 65535, 128, 256);
    apply(32767, 65535, -128, 0);
    apply(-32768, 65535, -1, 256);
    for (int i = 0; i < 20000; i++)
      apply($signed(16'($urandom)), int'(16'($urandom)),
            int'($urandom_range(0, 512)) - 256, int'($urandom_range(0, 256)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
