// tb_hidden_weight_memory: fills the memory, then mixes random reads and
// writes (including reads of the address being written, which must return
// the old word) and compares every read with a model array; read data is
// checked one cycle after the address, the memory's latency.
module tb_hidden_weight_memory;
  import meta_pkg::*;

  localparam int DEPTH = 256;
  localparam int AW    = 8;

  logic          clk = 0;
  logic          re, we;
  logic [AW-1:0] raddr, waddr;
  wh_t           rdata, wdata;
  wh_t           model [DEPTH];
  int checks = 0, failures = 0;

  hidden_weight_memory #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wh_t exp;
    bit  pend;
    re = 0; we = 0; raddr = '0; waddr = '0; wdata = '0; pend = 0; exp = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = wh_t'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 10) $display("read mismatch: got %0d expected %0d", rdata, exp);
        end
      end
      re    = $urandom_range(0, 1) == 1;
      raddr = AW'($urandom);
      we    = $urandom_range(0, 1) == 1;
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom);
      wdata = wh_t'($urandom);
      pend  = re;
      exp   = model[raddr];
      @(posedge clk);
      #1;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
