// prog_ctrl: the programming circuit of the crossbar. It takes a request to
// move one weight from level old_ws to level new_ws and issues the pulses
// that re-program its two memristors.
//
// Each weight is a pair of devices: the positive part of the level on the
// "plus" device, the negative part on the "minus" device, zero as both in the
// low-conductance state (LCS). For each device whose level changes, the
// circuit issues a RESET (if the device is not already in LCS) and then a SET
// whose compliance-current code equals the new level (if it is not LCS). A
// device whose level does not change receives no pulse: as in the paper, a
// memristor is touched only when its quantized level changes, which keeps the
// number of programming operations low. Pulses are single-shot, with no
// read-verify, as in the paper's experiment. With init = 1 (first
// programming after fabrication) each device is first formed, then reset,
// then set, whatever old_ws holds.
//
// Interface: req_valid/req_ready handshake; a request is taken when both are
// high and the circuit is then busy until its last pulse has ended. Each pulse
// is one cycle of `pulse` followed by PULSE_GAP idle cycles standing for the
// pulse duration. A request with no change completes in one cycle without
// pulses. n_pulses counts pulses, n_dev_prog counts device re-programmings
// (one per device whose level changed). The encoding, the reset-before-set
// order and the pulse timing are this design's choice.
module prog_ctrl
  import meta_pkg::*;
#(
  parameter int ROWS      = 128,
  parameter int COLS      = 64,
  parameter int PULSE_GAP = 3,
  parameter int RW        = $clog2(ROWS),
  parameter int CW        = $clog2(COLS)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [RW-1:0] req_row,
  input  logic [CW-1:0] req_col,
  input  lvl_t          req_old_ws,
  input  lvl_t          req_new_ws,
  input  logic          req_init,
  output logic          busy,
  // to the crossbar
  output logic          pulse,
  output logic [RW-1:0] pulse_row,
  output logic [CW:0]   pulse_dcol,
  output prog_op_e      pulse_op,
  output devl_t         pulse_icc,
  // statistics
  output logic [31:0]   n_pulses,
  output logic [31:0]   n_dev_prog
);
  typedef enum logic [2:0] {S_IDLE, S_DEV, S_FORM, S_RESET, S_SET, S_WAIT} state_e;

  state_e        state, after_wait;
  logic          dev;               // 0 plus device, 1 minus device
  logic [RW-1:0] row;
  logic [CW-1:0] col;
  logic          init;
  devl_t         old_l [2];
  devl_t         new_l [2];
  logic [$clog2(PULSE_GAP+1):0] gap;

  assign req_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // next step after a pulse of kind `op` on the current device
  function automatic state_e after(prog_op_e op, devl_t nl, logic last_dev);
    state_e s;
    unique case (op)
      PROG_FORM:  s = S_RESET;
      PROG_RESET: s = (nl != '0) ? S_SET : (last_dev ? S_IDLE : S_DEV);
      default:    s = last_dev ? S_IDLE : S_DEV;
    endcase
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      after_wait <= S_IDLE;
      dev        <= 1'b0;
      row        <= '0;
      col        <= '0;
      init       <= 1'b0;
      old_l      <= '{default: '0};
      new_l      <= '{default: '0};
      gap        <= '0;
      pulse      <= 1'b0;
      pulse_row  <= '0;
      pulse_dcol <= '0;
      pulse_op   <= PROG_RESET;
      pulse_icc  <= '0;
      n_pulses   <= '0;
      n_dev_prog <= '0;
    end else begin
      pulse <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          row      <= req_row;
          col      <= req_col;
          init     <= req_init;
          old_l[0] <= pos_part(req_old_ws);
          old_l[1] <= neg_part(req_old_ws);
          new_l[0] <= pos_part(req_new_ws);
          new_l[1] <= neg_part(req_new_ws);
          dev      <= 1'b0;
          state    <= S_DEV;
        end
        // decide what the current device needs
        S_DEV: begin
          if (init) begin
            state      <= S_FORM;
            n_dev_prog <= n_dev_prog + 1;
          end else if (old_l[dev] != new_l[dev]) begin
            state      <= (old_l[dev] != '0) ? S_RESET : S_SET;
            n_dev_prog <= n_dev_prog + 1;
          end else if (dev) begin
            state <= S_IDLE;
          end else begin
            dev <= 1'b1;
          end
        end
        S_FORM, S_RESET, S_SET: begin
          pulse      <= 1'b1;
          pulse_row  <= row;
          pulse_dcol <= {col, dev};
          pulse_op   <= (state == S_FORM)  ? PROG_FORM :
                        (state == S_RESET) ? PROG_RESET : PROG_SET;
          pulse_icc  <= new_l[dev];
          n_pulses   <= n_pulses + 1;
          gap        <= '0;
          after_wait <= after((state == S_FORM)  ? PROG_FORM :
                              (state == S_RESET) ? PROG_RESET : PROG_SET,
                              new_l[dev], dev);
          state      <= S_WAIT;
        end
        S_WAIT: begin
          if (gap == ($clog2(PULSE_GAP+1)+1)'(PULSE_GAP)) begin
            if (after_wait == S_DEV) dev <= 1'b1;
            state <= after_wait;
          end else begin
            gap <= gap + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a SET pulse always carries a non-zero compliance code
  a_set_icc: assert property (@(posedge clk) disable iff (!rst_n)
                              (pulse && pulse_op == PROG_SET) |-> (pulse_icc != '0));

endmodule
