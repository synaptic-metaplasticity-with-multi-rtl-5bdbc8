// tb_core_body: end-to-end test of metaplastic_core, shared by the reduced
// run (tb_metaplastic_core) and the full-size run (tb_metaplastic_core_full,
// FULL = 1, which leaves every parameter of the core at its default).
//
// It plays one training session on a tile: program every weight from the
// pristine state to a hidden weight drawn around the mid-point between two
// levels, read everything back, run updates with metaplasticity off (m* = 0,
// pre-training), switch it on (m* = 3) and run more updates, run forward and
// backward products, and push a weight into saturation. A reference model
// (hidden weights, levels, programming counts) is kept here from the
// equations. Every read, product and statistics counter is compared with it;
// an update that needs no re-programming must take 3 cycles. Each mechanism
// (consolidated update, plain update, level change, update without
// re-programming, programming stall, saturation, both modes, forward,
// backward) is counted and must have happened at least once.
module tb_core_body
  import meta_pkg::*;
  import meta_ref_pkg::*;
#(
  parameter bit FULL  = 1'b0,
  parameter int ROWS  = 8,
  parameter int COLS  = 4,
  parameter int N_UPD = 400      // updates per phase
);
  localparam int N     = ROWS * COLS;
  localparam int AW    = $clog2(N);
  localparam int CW    = $clog2(COLS);
  localparam int SUM_W = ACT_W + LVL_W + $clog2(ROWS > COLS ? ROWS : COLS);

  localparam logic [2:0] CMD_INIT = 3'd0, CMD_UPDATE = 3'd1, CMD_READ = 3'd2,
                         CMD_FWD = 3'd3, CMD_BWD = 3'd4;

  logic                    clk = 0, rst_n = 0, pristine_n = 0;
  logic                    meta_en = 0;
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

  if (FULL) begin : g_full
    metaplastic_core dut (.*);
  end else begin : g_small
    metaplastic_core #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  end

  always #5 clk = ~clk;

  int wh_ref [N];
  int checks = 0, failures = 0;
  int e_upd = 0, e_att = 0, e_chg = 0, e_sat = 0, e_devprog = 0;
  int cnt_nochange = 0, cnt_plain = 0, cnt_mode0 = 0, cnt_mode1 = 0, cnt_fwd = 0, cnt_bwd = 0;
  int last_cycles;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // issue one command; returns the cycles until the core is ready again
  task automatic send(logic [2:0] op, int a, int wh, int u, bit wait_rsp);
    int cyc;
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_addr = AW'(a); cmd_wh = wh_t'(wh); cmd_u = upd_t'(u);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!(cmd_ready && (!wait_rsp || rsp_valid))) begin
      if (rsp_valid) wait_rsp = 0;
      @(negedge clk);
      cyc++;
    end
    last_cycles = cyc;
  endtask

  function automatic int pp(int l); return l > 0 ? l : 0;  endfunction
  function automatic int np(int l); return l < 0 ? -l : 0; endfunction

  task automatic read_check(int a);
    int ws, rs; bit inr;
    @(negedge clk);
    cmd_valid = 1; cmd_op = CMD_READ; cmd_addr = AW'(a);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    ref_quant(wh_ref[a], ws, rs, inr);
    check(int'(rsp_wh), wh_ref[a], "read W_H");
    check(int'(rsp_ws), ws, "read W_S");
    check(int'(rsp_formed), 1, "read formed");
  endtask

  task automatic update(int a, int u, bit back_to_back);
    int ws0, r0, ws1, r1, m, nw;
    bit i0, i1, att;
    longint dw;
    ref_quant(wh_ref[a], ws0, r0, i0);
    m  = ref_m(meta_en, r0, i0, 3.0);
    dw = ref_dw(u, int'(eta), r0, m, att);
    nw = ref_sat16(longint'(wh_ref[a]) + dw);
    ref_quant(nw, ws1, r1, i1);
    e_upd++;
    if (att) e_att++; else cnt_plain++;
    if (longint'(nw) != longint'(wh_ref[a]) + dw) e_sat++;
    if (meta_en) cnt_mode1++; else cnt_mode0++;
    if (ws1 != ws0) begin
      e_chg++;
      e_devprog += (pp(ws0) != pp(ws1)) + (np(ws0) != np(ws1));
    end else begin
      cnt_nochange++;
    end
    wh_ref[a] = nw;
    if (back_to_back) begin
      @(negedge clk);
      cmd_valid = 1; cmd_op = CMD_UPDATE; cmd_addr = AW'(a); cmd_u = upd_t'(u);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
    end else begin
      send(CMD_UPDATE, a, 0, u, 1'b0);
      if (ws1 == ws0) check(last_cycles, 3, "update cycles");
    end
  endtask

  task automatic mvm(bit dir);
    int acc, ws, rs; bit inr;
    foreach (x_in[i]) x_in[i] = act_t'($urandom);
    foreach (d_in[j]) d_in[j] = act_t'($urandom);
    send(dir ? CMD_BWD : CMD_FWD, 0, 0, 0, 1'b1);
    if (!dir) begin
      cnt_fwd++;
      for (int j = 0; j < COLS; j++) begin
        acc = 0;
        for (int i = 0; i < ROWS; i++) begin
          ref_quant(wh_ref[i*COLS + j], ws, rs, inr);
          acc += ws * int'(x_in[i]);
        end
        check(int'(y_out[j]), acc, "forward y");
      end
    end else begin
      cnt_bwd++;
      for (int i = 0; i < ROWS; i++) begin
        acc = 0;
        for (int j = 0; j < COLS; j++) begin
          ref_quant(wh_ref[i*COLS + j], ws, rs, inr);
          acc += ws * int'(d_in[j]);
        end
        check(int'(z_out[i]), acc, "backward z");
      end
    end
  endtask

  task automatic counters(string when);
    check(int'(n_updates),       e_upd,         {when, " n_updates"});
    check(int'(n_attenuated),    e_att,         {when, " n_attenuated"});
    check(int'(n_level_changes), e_chg,         {when, " n_level_changes"});
    check(int'(n_saturated),     e_sat,         {when, " n_saturated"});
    check(int'(n_dev_prog),      e_devprog,     {when, " n_dev_prog"});
  endtask

  task automatic seen(int n, string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else begin
      $display("mechanism %s: %0d", what, n);
    end
  endtask

  initial begin
    repeat (FULL ? 4000000 : 400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x_in[i]) x_in[i] = '0;
    foreach (d_in[j]) d_in[j] = '0;
    repeat (3) @(negedge clk);
    pristine_n = 1;
    rst_n      = 1;

    // initial programming: W_H near the mid-point between two levels
    for (int a = 0; a < N; a++) begin
      int lv, noise;
      lv    = int'($urandom_range(0, 15)) - 8;           // lower level, -8..7
      noise = int'($urandom_range(0, 40)) + int'($urandom_range(0, 40))
            + int'($urandom_range(0, 40)) - 60;           // bell-shaped, +-60
      wh_ref[a] = lv * 256 + 128 + noise;
      e_devprog += 2;
      send(CMD_INIT, a, wh_ref[a], 0, 1'b1);
    end
    for (int a = 0; a < N; a++) read_check(a);
    mvm(1'b0);
    mvm(1'b1);

    // pre-training: m* = 0
    meta_en = 0;
    for (int k = 0; k < N_UPD; k++)
      update($urandom_range(0, N-1), $signed(16'($urandom_range(0, 400))) - 200, 1'b0);
    counters("phase m*=0");

    // metaplastic training: m* = 3 (mode switch)
    meta_en = 1;
    for (int k = 0; k < N_UPD; k++)
      update($urandom_range(0, N-1), $signed(16'($urandom_range(0, 400))) - 200, 1'b0);
    // back-to-back level changes: the programming circuit is still busy
    for (int k = 0; k < 8; k++)
      update(k % N, (k[0] ? 1 : -1) * 2000, 1'b1);
    read_check(0);     // waits until the programming circuit is idle
    counters("phase m*=3");
    mvm(1'b0);
    mvm(1'b1);

    // saturation of the hidden-weight word
    wh_ref[N-1] = 32700;
    e_devprog += 2;
    send(CMD_INIT, N-1, 32700, 0, 1'b1);
    update(N-1, -32768, 1'b0);
    read_check(N-1);
    counters("after saturation");

    for (int a = 0; a < N; a++) read_check(a);
    mvm(1'b0);
    mvm(1'b1);

    seen(e_att,        "consolidated (M-scaled) update");
    seen(cnt_plain,    "plain update");
    seen(e_chg,        "level change with re-programming");
    seen(cnt_nochange, "update without re-programming");
    seen(int'(n_stall), "programming stall cycles");
    seen(e_sat,        "hidden-weight saturation");
    seen(cnt_mode0,    "updates with m*=0");
    seen(cnt_mode1,    "updates with m*=3");
    seen(cnt_fwd,      "forward products");
    seen(cnt_bwd,      "backward products");
    $display("programming pulses: %0d, device programmings: %0d", n_pulses, n_dev_prog);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
