// tb_rram_cell: checks the device model's pulse response. A pristine device
// ignores SET and RESET, FORM leaves the top HCS level, RESET goes to LCS,
// SET selects level icc from a lower level and never lowers a higher one.
// Every (op, icc, level, formed) combination is compared with those rules,
// and a random pulse sequence is played through a register holding the
// device state.
module tb_rram_cell;
  import meta_pkg::*;

  prog_op_e op;
  devl_t    icc, level, level_next;
  logic     formed, formed_next;
  int checks = 0, failures = 0;

  rram_cell dut (.*);

  task automatic expect_state(int l, bit f, string what);
    checks++;
    if (int'(level_next) != l || formed_next != f) begin
      failures++;
      if (failures < 10)
        $display("%s: op=%0d icc=%0d level=%0d formed=%0b -> %0d %0b, expected %0d %0b",
                 what, op, icc, level, formed, level_next, formed_next, l, f);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l, c;
    bit f;
    // exhaustive over legal states
    for (int o = 0; o < 3; o++)
      for (int fi = 0; fi < 2; fi++)
        for (int li = 0; li <= 8; li++)
          for (int ci = 1; ci <= 8; ci++) begin
            if (fi == 0 && li != 0) continue;   // a pristine device reads 0
            op = prog_op_e'(o); icc = devl_t'(ci); level = devl_t'(li); formed = fi[0];
            #1;
            unique case (o)
              0: expect_state(8, 1, "form");
              1: expect_state(fi ? 0 : li, fi[0], "reset");
              default: expect_state((fi && ci > li) ? ci : li, fi[0], "set");
            endcase
          end
    // a device's life: pristine, formed, then random pulses
    l = 0; f = 0;
    for (int i = 0; i < 500; i++) begin
      int o;
      o  = (i == 0) ? 0 : int'($urandom_range(1, 2));
      c  = $urandom_range(1, 8);
      op = prog_op_e'(o); icc = devl_t'(c); level = devl_t'(l); formed = f;
      #1;
      if (o == 0) begin l = 8; f = 1; end
      else if (o == 1) l = 0;
      else if (c > l) l = c;
      expect_state(l, f, "sequence");
      l = int'(level_next); f = formed_next;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
