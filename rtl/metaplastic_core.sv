// metaplastic_core: one tile of the mixed analog/digital on-chip learning
// architecture for quantized neural networks with synaptic metaplasticity.
//
// The quantized weights W_S live as conductances in a memristor crossbar
// (crossbar_array, a behavioural model of the analog tile) that computes the
// forward and backward matrix-vector products in place. The high-precision
// hidden weights W_H live in a digital memory (hidden_weight_memory). For
// every weight update the digital path reads W_H, finds its quantized level
// (quantizer), the metaplastic factor M (meta_function) and the update
// (compute_dwh), adds it (wh_adder), writes W_H back, re-quantizes it and,
// only if the level changed, hands the weight to the programming circuit
// (prog_ctrl), which re-programs the two memristors of the pair. This is the
// loop of the paper's architecture figure; the optimizer (Adam) that produces
// U_W and the activation / cost / gradient arithmetic around the crossbar are
// outside this tile and reach it through ports.
//
// Commands (cmd_valid/cmd_ready, taken when both are high, one at a time):
//   CMD_INIT   write W_H = cmd_wh at cmd_addr and program the pair from
//              pristine (form, reset, set) to the nearest level.
//   CMD_UPDATE apply the optimizer update cmd_u to the weight at cmd_addr
//              (lines 6-11 of the training algorithm, then re-quantize).
//   CMD_READ   return W_H (memory) and W_S (crossbar read-back) of cmd_addr.
//   CMD_FWD    y_j = sum_i W_S,ij x_i with x_in sampled at the command.
//   CMD_BWD    z_i = sum_j W_S,ij d_j with d_in sampled at the command.
// READ, FWD, BWD and INIT answer with a one-cycle rsp_valid. An UPDATE takes
// three cycles (accept, memory read, write-back) when no re-programming is
// needed. Programming runs in the background; the core stalls (counted in
// n_stall) when a new programming request, a read-back or a product needs the
// crossbar while the programming circuit is still busy. meta_en = 0 runs the
// rule with m* = 0 (plain quantized training, the paper's pre-training
// epochs); meta_en = 1 uses m* = M_STAR. LEVELS sets the 17 quantized levels
// (default: equally spaced over [-1.5, 1.5]). cmd_addr = row * COLS + col, COLS a
// power of two.
//
// pristine_n returns the crossbar model to its state at fabrication; rst_n
// resets only the digital logic (the memristors are non-volatile).
module metaplastic_core
  import meta_pkg::*;
#(
  parameter int  ROWS      = 128,
  parameter int  COLS      = 64,
  parameter int  PULSE_GAP = 3,
  parameter real M_STAR    = 3.0,
  parameter int  LUT_BITS  = 7,
  parameter lvl_tab_t LEVELS = equal_levels(),
  parameter int  SUM_W     = ACT_W + LVL_W + $clog2(ROWS > COLS ? ROWS : COLS),
  parameter int  AW        = $clog2(ROWS * COLS)
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pristine_n,
  // configuration
  input  logic                    meta_en,
  input  eta_t                    eta,
  // command port
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  logic [2:0]              cmd_op,
  input  logic [AW-1:0]           cmd_addr,
  input  wh_t                     cmd_wh,
  input  upd_t                    cmd_u,
  input  act_t                    x_in [ROWS],
  input  act_t                    d_in [COLS],
  // response port
  output logic                    rsp_valid,
  output wh_t                     rsp_wh,
  output lvl_t                    rsp_ws,
  output logic                    rsp_formed,
  output logic signed [SUM_W-1:0] y_out [COLS],
  output logic signed [SUM_W-1:0] z_out [ROWS],
  // statistics
  output logic [31:0]             n_updates,
  output logic [31:0]             n_attenuated,
  output logic [31:0]             n_level_changes,
  output logic [31:0]             n_saturated,
  output logic [31:0]             n_stall,
  output logic [31:0]             n_pulses,
  output logic [31:0]             n_dev_prog
);
  localparam int RW = $clog2(ROWS);
  localparam int CW = $clog2(COLS);

  localparam logic [2:0] CMD_INIT   = 3'd0;
  localparam logic [2:0] CMD_UPDATE = 3'd1;
  localparam logic [2:0] CMD_READ   = 3'd2;
  localparam logic [2:0] CMD_FWD    = 3'd3;
  localparam logic [2:0] CMD_BWD    = 3'd4;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT_WB, S_UPD_RD, S_UPD_WB, S_PROG,
    S_READ_WAIT, S_MVM_WAIT, S_MVM_RUN
  } state_e;

  state_e        state;
  logic [AW-1:0] addr;
  wh_t           wh_reg;
  upd_t          u_reg;
  logic          dir_reg;
  act_t          x_reg [ROWS];
  act_t          d_reg [COLS];

  // programming request held until the programming circuit takes it
  lvl_t          preq_old, preq_new;
  logic          preq_init;

  // ---------------------------------------------------------------- memory
  logic mem_re, mem_we;
  wh_t  mem_rdata, mem_wdata;

  hidden_weight_memory #(.DEPTH(ROWS * COLS)) u_mem (
    .clk   (clk),
    .re    (mem_re),
    .raddr (cmd_addr),
    .rdata (mem_rdata),
    .we    (mem_we),
    .waddr (addr),
    .wdata (mem_wdata)
  );

  // ------------------------------------------------------- update datapath
  lvl_t                 ws_old, ws_new;
  logic signed [WH_W:0] resid_old, resid_new;
  logic                 inr_old, inr_new;
  ivl_t                 ivl_old, ivl_new;
  mfac_t                mfac;
  dw_t                  dw;
  logic                 attenuated, sat;
  wh_t                  wh_new, q2_in;

  quantizer #(.LEVELS(LEVELS)) u_q_old (
    .wh(mem_rdata), .ws(ws_old), .resid(resid_old), .ivl(ivl_old), .in_range(inr_old));

  meta_function #(.M_STAR(M_STAR), .LUT_BITS(LUT_BITS), .LEVELS(LEVELS)) u_meta (
    .meta_en (meta_en),
    .resid   (resid_old),
    .ivl     (ivl_old),
    .in_range(inr_old),
    .m       (mfac)
  );

  compute_dwh u_dwh (
    .u         (u_reg),
    .eta       (eta),
    .resid     (resid_old),
    .m         (mfac),
    .dw        (dw),
    .attenuated(attenuated)
  );

  wh_adder u_add (.wh_old(mem_rdata), .dw(dw), .wh_new(wh_new), .sat(sat));

  // the second quantizer approximates the new W_H (update) or the initial one
  assign q2_in = (state == S_UPD_WB) ? wh_new : wh_reg;
  quantizer #(.LEVELS(LEVELS)) u_q_new (
    .wh(q2_in), .ws(ws_new), .resid(resid_new), .ivl(ivl_new), .in_range(inr_new));

  assign mem_re    = (state == S_IDLE) && cmd_valid &&
                     (cmd_op == CMD_UPDATE || cmd_op == CMD_READ);
  assign mem_we    = (state == S_UPD_WB) || (state == S_INIT_WB);
  assign mem_wdata = (state == S_UPD_WB) ? wh_new : wh_reg;

  // ------------------------------------------------- programming + crossbar
  logic          preq_valid, preq_ready, prog_busy;
  logic          pulse;
  logic [RW-1:0] pulse_row;
  logic [CW:0]   pulse_dcol;
  prog_op_e      pulse_op;
  devl_t         pulse_icc;
  logic          mvm_start, mvm_done;

  assign preq_valid = (state == S_PROG);

  prog_ctrl #(.ROWS(ROWS), .COLS(COLS), .PULSE_GAP(PULSE_GAP)) u_prog (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (preq_valid),
    .req_ready  (preq_ready),
    .req_row    (addr[AW-1:CW]),
    .req_col    (addr[CW-1:0]),
    .req_old_ws (preq_old),
    .req_new_ws (preq_new),
    .req_init   (preq_init),
    .busy       (prog_busy),
    .pulse      (pulse),
    .pulse_row  (pulse_row),
    .pulse_dcol (pulse_dcol),
    .pulse_op   (pulse_op),
    .pulse_icc  (pulse_icc),
    .n_pulses   (n_pulses),
    .n_dev_prog (n_dev_prog)
  );

  assign mvm_start = (state == S_MVM_WAIT) && !prog_busy;

  crossbar_array #(.ROWS(ROWS), .COLS(COLS), .SUM_W(SUM_W)) u_xbar (
    .clk        (clk),
    .rst_n      (pristine_n),
    .prog_pulse (pulse),
    .prog_row   (pulse_row),
    .prog_dcol  (pulse_dcol),
    .prog_op    (pulse_op),
    .prog_icc   (pulse_icc),
    .mvm_start  (mvm_start),
    .mvm_dir    (dir_reg),
    .x_in       (x_reg),
    .d_in       (d_reg),
    .y_out      (y_out),
    .z_out      (z_out),
    .mvm_done   (mvm_done),
    .rd_row     (addr[AW-1:CW]),
    .rd_col     (addr[CW-1:0]),
    .rd_ws      (rsp_ws),
    .rd_formed  (rsp_formed)
  );

  assign cmd_ready = (state == S_IDLE);

  // -------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      addr            <= '0;
      wh_reg          <= '0;
      u_reg           <= '0;
      dir_reg         <= 1'b0;
      x_reg           <= '{default: '0};
      d_reg           <= '{default: '0};
      preq_old        <= '0;
      preq_new        <= '0;
      preq_init       <= 1'b0;
      rsp_valid       <= 1'b0;
      rsp_wh          <= '0;
      n_updates       <= '0;
      n_attenuated    <= '0;
      n_level_changes <= '0;
      n_saturated     <= '0;
      n_stall         <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          addr    <= cmd_addr;
          wh_reg  <= cmd_wh;
          u_reg   <= cmd_u;
          dir_reg <= (cmd_op == CMD_BWD);
          unique case (cmd_op)
            CMD_INIT:   state <= S_INIT_WB;
            CMD_UPDATE: state <= S_UPD_RD;
            CMD_READ:   state <= S_READ_WAIT;
            CMD_FWD, CMD_BWD: begin
              x_reg <= x_in;
              d_reg <= d_in;
              state <= S_MVM_WAIT;
            end
            default:    state <= S_IDLE;
          endcase
        end
        S_INIT_WB: begin
          preq_old  <= '0;
          preq_new  <= ws_new;
          preq_init <= 1'b1;
          state     <= S_PROG;
        end
        S_UPD_RD: state <= S_UPD_WB;
        S_UPD_WB: begin
          n_updates <= n_updates + 1;
          if (attenuated) n_attenuated <= n_attenuated + 1;
          if (sat)        n_saturated  <= n_saturated + 1;
          preq_old  <= ws_old;
          preq_new  <= ws_new;
          preq_init <= 1'b0;
          if (ws_new != ws_old) begin
            n_level_changes <= n_level_changes + 1;
            state           <= S_PROG;
          end else begin
            state <= S_IDLE;
          end
        end
        S_PROG: begin
          if (preq_ready) begin
            state     <= S_IDLE;
            rsp_valid <= preq_init;
            rsp_wh    <= wh_reg;
          end else begin
            n_stall <= n_stall + 1;
          end
        end
        S_READ_WAIT: begin
          if (!prog_busy) begin
            rsp_valid <= 1'b1;
            rsp_wh    <= mem_rdata;
            state     <= S_IDLE;
          end else begin
            n_stall <= n_stall + 1;
          end
        end
        S_MVM_WAIT: begin
          if (!prog_busy) state <= S_MVM_RUN;
          else            n_stall <= n_stall + 1;
        end
        S_MVM_RUN: if (mvm_done) begin
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a weight is handed to the programming circuit only when its level moved
  a_prog_only_on_change: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_PROG && !preq_init) |-> (preq_old != preq_new));

endmodule
