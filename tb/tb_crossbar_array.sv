// tb_crossbar_array: programs a small tile (8 x 4 weights) device by device
// with random levels -8..8 (form, reset, set on each device), checks the
// read-back of every weight, then compares forward and backward products for
// random activations and errors with sums computed here. The result must
// appear exactly one cycle after mvm_start.
module tb_crossbar_array;
  import meta_pkg::*;

  localparam int ROWS = 8, COLS = 4, RW = 3, CW = 2;
  localparam int SUM_W = ACT_W + LVL_W + 3;

  logic                    clk = 0, rst_n = 0;
  logic                    prog_pulse = 0;
  logic [RW-1:0]           prog_row = '0;
  logic [CW:0]             prog_dcol = '0;
  prog_op_e                prog_op = PROG_RESET;
  devl_t                   prog_icc = '0;
  logic                    mvm_start = 0, mvm_dir = 0;
  act_t                    x_in [ROWS];
  act_t                    d_in [COLS];
  logic signed [SUM_W-1:0] y_out [COLS];
  logic signed [SUM_W-1:0] z_out [ROWS];
  logic                    mvm_done;
  logic [RW-1:0]           rd_row = '0;
  logic [CW-1:0]           rd_col = '0;
  lvl_t                    rd_ws;
  logic                    rd_formed;
  int                      w [ROWS][COLS];
  int checks = 0, failures = 0;

  crossbar_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  task automatic pulse_dev(int r, int dc, prog_op_e o, int c);
    @(negedge clk);
    prog_pulse = 1; prog_row = RW'(r); prog_dcol = (CW+1)'(dc); prog_op = o; prog_icc = devl_t'(c);
    @(negedge clk);
    prog_pulse = 0;
  endtask

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x_in[i]) x_in[i] = '0;
    foreach (d_in[j]) d_in[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // pristine cells read as zero and unformed
    @(negedge clk);
    check(int'(rd_ws), 0, "pristine weight");
    check(int'(rd_formed), 0, "pristine formed");
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = int'($urandom_range(0, 16)) - 8;
        for (int s = 0; s < 2; s++) begin
          int lv;
          lv = (s == 0) ? (w[r][c] > 0 ? w[r][c] : 0) : (w[r][c] < 0 ? -w[r][c] : 0);
          pulse_dev(r, 2*c + s, PROG_FORM, 0);
          pulse_dev(r, 2*c + s, PROG_RESET, 0);
          if (lv != 0) pulse_dev(r, 2*c + s, PROG_SET, lv);
        end
      end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        rd_row = RW'(r); rd_col = CW'(c);
        #1;
        check(int'(rd_ws), w[r][c], "read-back");
        check(int'(rd_formed), 1, "formed");
      end
    for (int t = 0; t < 50; t++) begin
      int acc;
      bit dir;
      dir = t[0];
      @(negedge clk);
      foreach (x_in[i]) x_in[i] = act_t'($urandom);
      foreach (d_in[j]) d_in[j] = act_t'($urandom);
      mvm_start = 1; mvm_dir = dir;
      @(negedge clk);
      mvm_start = 0;
      check(int'(mvm_done), 1, "done after one cycle");
      if (!dir) begin
        for (int j = 0; j < COLS; j++) begin
          acc = 0;
          for (int i = 0; i < ROWS; i++) acc += w[i][j] * int'(x_in[i]);
          check(int'(y_out[j]), acc, "forward");
        end
      end else begin
        for (int i = 0; i < ROWS; i++) begin
          acc = 0;
          for (int j = 0; j < COLS; j++) acc += w[i][j] * int'(d_in[j]);
          check(int'(z_out[i]), acc, "backward");
        end
      end
      @(negedge clk);
      check(int'(mvm_done), 0, "done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
