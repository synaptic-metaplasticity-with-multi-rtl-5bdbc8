// tb_wh_adder: saturating addition of the hidden-weight update, random and
// at both limits, against a wide-integer reference.
module tb_wh_adder;
  import meta_pkg::*;
  import meta_ref_pkg::*;

  wh_t  a, s;
  dw_t  d;
  logic sat;
  int checks = 0, failures = 0;

  wh_adder dut (.wh_old(a), .dw(d), .wh_new(s), .sat(sat));

  task automatic apply(int aa, int dd);
    longint sum;
    int     e;
    a = wh_t'(aa); d = dw_t'(dd);
    #1;
    sum = longint'(aa) + longint'(dd);
    e   = ref_sat16(sum);
    checks++;
    if (int'(s) != e || sat != (longint'(e) != sum)) begin
      failures++;
      if (failures < 10) $display("%0d + %0d: got %0d sat=%0b expected %0d", aa, dd, s, sat, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(32767, 1);
    apply(-32768, -1);
    apply(32000, 1000000);
    apply(-32000, -1000000);
    apply(100, -200);
    for (int i = 0; i < 20000; i++)
      apply($signed(16'($urandom)), int'($urandom_range(0, 200000)) - 100000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
