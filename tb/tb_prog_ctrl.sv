// tb_prog_ctrl: sends initial and random re-programming requests to the
// programming circuit, applies the pulses it issues to a device-level model
// kept here, and checks after each request that the two devices of the
// weight hold the differential encoding of the new level, that no other
// device was touched, that the number of pulses and device programmings
// matches the rule (form/reset/set on init; reset if not in LCS and set if
// not LCS, only for devices whose level changes) and that the circuit is
// busy for exactly 2 + pulses * (PULSE_GAP + 2) cycles.
module tb_prog_ctrl;
  import meta_pkg::*;

  localparam int ROWS = 4, COLS = 4, RW = 2, CW = 2, GAP = 3;

  logic          clk = 0, rst_n = 0;
  logic          req_valid = 0, req_ready, req_init = 0;
  logic [RW-1:0] req_row = '0;
  logic [CW-1:0] req_col = '0;
  lvl_t          req_old_ws = '0, req_new_ws = '0;
  logic          busy, pulse;
  logic [RW-1:0] pulse_row;
  logic [CW:0]   pulse_dcol;
  prog_op_e      pulse_op;
  devl_t         pulse_icc;
  logic [31:0]   n_pulses, n_dev_prog;

  int dev   [ROWS][2*COLS];     // device levels seen through the pulses
  int wts   [ROWS][COLS];       // current level of each weight
  int seen_pulses, busy_cycles;
  int checks = 0, failures = 0;

  prog_ctrl #(.ROWS(ROWS), .COLS(COLS), .PULSE_GAP(GAP)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (pulse) begin
      seen_pulses++;
      unique case (pulse_op)
        PROG_FORM:  dev[pulse_row][pulse_dcol] = 8;
        PROG_RESET: dev[pulse_row][pulse_dcol] = 0;
        PROG_SET:   if (int'(pulse_icc) > dev[pulse_row][pulse_dcol])
                      dev[pulse_row][pulse_dcol] = int'(pulse_icc);
        default: ;
      endcase
    end
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int pp(int l); return l > 0 ? l : 0;  endfunction
  function automatic int np(int l); return l < 0 ? -l : 0; endfunction

  task automatic request(int r, int c, int nw, bit init);
    int ow, exp_p, exp_d, p0, d0;
    ow = wts[r][c];
    exp_p = 0; exp_d = 0;
    if (init) begin
      exp_p = 4 + (pp(nw) != 0) + (np(nw) != 0);
      exp_d = 2;
    end else begin
      if (pp(ow) != pp(nw)) begin exp_p += (pp(ow) != 0) + (pp(nw) != 0); exp_d++; end
      if (np(ow) != np(nw)) begin exp_p += (np(ow) != 0) + (np(nw) != 0); exp_d++; end
    end
    p0 = int'(n_pulses); d0 = int'(n_dev_prog);
    seen_pulses = 0; busy_cycles = 0;
    @(negedge clk);
    req_valid = 1; req_row = RW'(r); req_col = CW'(c);
    req_old_ws = lvl_t'(ow); req_new_ws = lvl_t'(nw); req_init = init;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (busy) @(negedge clk);
    wts[r][c] = nw;
    check(seen_pulses, exp_p, "pulses seen");
    check(int'(n_pulses) - p0, exp_p, "pulse counter");
    check(int'(n_dev_prog) - d0, exp_d, "device programmings");
    check(busy_cycles, 2 + exp_p * (GAP + 2), "busy cycles");
    for (int rr = 0; rr < ROWS; rr++)
      for (int cc = 0; cc < COLS; cc++) begin
        check(dev[rr][2*cc],   pp(wts[rr][cc]), "plus device");
        check(dev[rr][2*cc+1], np(wts[rr][cc]), "minus device");
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (dev[r, c]) dev[r][c] = 0;
    foreach (wts[r, c]) wts[r][c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        request(r, c, int'($urandom_range(0, 16)) - 8, 1'b1);
    request(1, 1, wts[1][1], 1'b0);     // no change: no pulse
    request(2, 2, 5, 1'b0);
    request(2, 2, -3, 1'b0);            // sign change: both devices
    request(2, 2, 0, 1'b0);
    request(2, 2, 0, 1'b0);
    for (int i = 0; i < 200; i++)
      request($urandom_range(0, ROWS-1), $urandom_range(0, COLS-1),
              int'($urandom_range(0, 16)) - 8, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
