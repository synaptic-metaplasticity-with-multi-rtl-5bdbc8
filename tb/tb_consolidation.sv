// tb_consolidation: shows the effect metaplasticity is for, on a 16 x 8
// tile. Every weight starts close to a level, as after learning a first
// task, with W_H a small random distance (up to 1/8 step) from it. The tile
// then receives a stream of unrelated "second task" updates: random signs,
// magnitudes up to 0.4 of a level step. The same stream is applied twice
// from the same starting point: once with m* = 0 (plain quantized training)
// and once with m* = 3. The number of weights whose level changed (lost
// "memories") and the number of re-programmed devices are compared. With
// metaplasticity both must be much lower: here at most half of the m* = 0
// count. Each run's level-change counter must also be at least the number of
// weights found off their first level by reading the crossbar back (a weight
// that leaves its level and returns counts two changes).
module tb_consolidation;
  import meta_pkg::*;

  localparam int ROWS = 16, COLS = 8, N = ROWS * COLS, AW = 7, SUM_W = ACT_W + LVL_W + 4;
  localparam int N_STEPS = 6 * N;

  logic                    clk = 0, rst_n = 0, pristine_n = 0, meta_en = 0;
  eta_t                    eta = eta_t'(4096);
  logic                    cmd_valid = 0, cmd_ready;
  logic [2:0]              cmd_op = '0;
  logic [AW-1:0]           cmd_addr = '0;
  wh_t                     cmd_wh = '0;
  upd_t                    cmd_u = '0;
  act_t                    x_in [ROWS];
  act_t                    d_in [COLS];
  logic                    rsp_valid, rsp_formed;
  wh_t                     rsp_wh;
  lvl_t                    rsp_ws;
  logic signed [SUM_W-1:0] y_out [COLS];
  logic signed [SUM_W-1:0] z_out [ROWS];
  logic [31:0]             n_updates, n_attenuated, n_level_changes, n_saturated,
                           n_stall, n_pulses, n_dev_prog;

  metaplastic_core #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  int wh0 [N];
  int ws0 [N];
  int addr_seq [N_STEPS];
  int u_seq    [N_STEPS];
  int checks = 0, failures = 0;

  task automatic cmd(logic [2:0] op, int a, int wh, int u);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_addr = AW'(a); cmd_wh = wh_t'(wh); cmd_u = upd_t'(u);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    if (op == 3'd0 || op == 3'd2) while (!rsp_valid) @(negedge clk);
  endtask

  // one run from the common starting point; returns weights off their level
  task automatic run(bit meta, output int moved, output int chg, output int devp);
    int c0, d0;
    for (int a = 0; a < N; a++) cmd(3'd0, a, wh0[a], 0);
    cmd(3'd2, 0, 0, 0);                       // wait for programming to finish
    c0 = int'(n_level_changes);
    d0 = int'(n_dev_prog);
    meta_en = meta;
    for (int k = 0; k < N_STEPS; k++) cmd(3'd1, addr_seq[k], 0, u_seq[k]);
    moved = 0;
    for (int a = 0; a < N; a++) begin
      cmd(3'd2, a, 0, 0);
      if (int'(rsp_ws) != ws0[a]) moved++;
    end
    chg  = int'(n_level_changes) - c0;
    devp = int'(n_dev_prog) - d0;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int moved_plain, chg_plain, dev_plain, moved_meta, chg_meta, dev_meta;
    int first_init_devp;
    foreach (x_in[i]) x_in[i] = '0;
    foreach (d_in[j]) d_in[j] = '0;
    for (int a = 0; a < N; a++) begin
      ws0[a] = int'($urandom_range(0, 14)) - 7;
      wh0[a] = ws0[a] * 256 + int'($urandom_range(0, 64)) - 32;
    end
    for (int k = 0; k < N_STEPS; k++) begin
      addr_seq[k] = $urandom_range(0, N - 1);
      u_seq[k]    = int'($urandom_range(0, 204)) - 102;
    end
    repeat (3) @(negedge clk);
    pristine_n = 1;
    rst_n      = 1;

    run(1'b0, moved_plain, chg_plain, dev_plain);
    run(1'b1, moved_meta,  chg_meta,  dev_meta);
    $display("m*=0: %0d of %0d weights left their level, %0d level changes, %0d device programmings",
             moved_plain, N, chg_plain, dev_plain);
    $display("m*=3: %0d of %0d weights left their level, %0d level changes, %0d device programmings",
             moved_meta, N, chg_meta, dev_meta);

    checks++;
    if (moved_plain == 0) begin failures++; $display("the m*=0 run moved no weight"); end
    checks++;
    if (2 * moved_meta > moved_plain) begin failures++; $display("metaplasticity did not protect the levels"); end
    checks++;
    if (2 * dev_meta > dev_plain) begin failures++; $display("metaplasticity did not save programming operations"); end
    checks++;
    if (chg_meta > chg_plain) begin failures++; $display("more level changes with metaplasticity"); end
    // a weight that moved off its level and back counts twice in chg
    checks++;
    if (chg_plain < moved_plain || chg_meta < moved_meta) begin
      failures++;
      $display("level-change counter below the weights found moved");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
